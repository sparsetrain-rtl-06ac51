// Threshold determination and prediction for gradient pruning.
//
// Keeps, for every CONV layer, a FIFO of the last NF pruning thresholds.
// The predicted threshold of the selected layer is the mean of its FIFO,
// and pruning is allowed only once the FIFO is full. At the end of a batch
// the host pushes the batch's threshold, determined here as
//   tau = A * coef / 2^COEF_FRAC,
// where A is the sum of |g| over the batch's gradients (collected by the
// post-processing units) and coef = |Phi^-1((1-p)/2)| * sqrt(2/pi) / n is
// a per-layer constant for target sparsity p and n gradients, supplied by
// the host. A push into a full FIFO drops the oldest entry.
// Interface: tau_pred and full are combinational from layer; push takes
// effect at the next clock edge; tau_det shows the value a push would store.
// The FIFO-mean prediction and the threshold formula follow the paper;
// the fixed-point coefficient, NF and the layer count are this design's.
module threshold_predictor #(
  parameter int NF        = 4,     // power of two
  parameter int NLAYERS   = 256,
  parameter int TAU_W     = 16,
  parameter int A_W       = 40,
  parameter int COEF_W    = 24,
  parameter int COEF_FRAC = 24
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic [$clog2(NLAYERS)-1:0] layer,
  input  logic                       push,
  input  logic [A_W-1:0]             a_sum,
  input  logic [COEF_W-1:0]          coef,
  output logic [TAU_W-1:0]           tau_det,
  output logic [TAU_W-1:0]           tau_pred,
  output logic                       full
);
  localparam int CW = $clog2(NF + 1);

  logic [TAU_W-1:0] taus [NLAYERS][NF];
  logic [CW-1:0]    cnt  [NLAYERS];

  // determination: one multiply, shift, saturate
  logic [A_W+COEF_W-1:0] prod, scaled;
  assign prod   = (A_W+COEF_W)'(a_sum) * (A_W+COEF_W)'(coef);
  assign scaled = prod >> COEF_FRAC;
  assign tau_det = (scaled > (A_W+COEF_W)'({TAU_W{1'b1}})) ? {TAU_W{1'b1}} : scaled[TAU_W-1:0];

  // prediction: mean of the selected layer's FIFO
  logic [TAU_W+$clog2(NF):0] sum;
  always_comb begin
    sum = '0;
    for (int i = 0; i < NF; i++) sum += (TAU_W+$clog2(NF)+1)'(taus[layer][i]);
  end
  assign tau_pred = TAU_W'(sum >> $clog2(NF));
  assign full     = (cnt[layer] == CW'(NF));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int l = 0; l < NLAYERS; l++) begin
        cnt[l] <= '0;
        for (int i = 0; i < NF; i++) taus[l][i] <= '0;
      end
    end else if (push) begin
      taus[layer][0] <= tau_det;
      for (int i = 1; i < NF; i++) taus[layer][i] <= taus[layer][i-1];
      if (cnt[layer] != CW'(NF)) cnt[layer] <= cnt[layer] + 1'b1;
    end
  end

  initial assert (NF == (1 << $clog2(NF))) else $error("NF must be a power of two");
endmodule
