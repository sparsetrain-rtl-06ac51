// Stochastic gradient pruner.
//
// For a threshold tau, a gradient g with |g| >= tau passes unchanged. A
// smaller one becomes sign(g)*tau with probability |g|/tau and 0 otherwise,
// so its expected value is kept while most small gradients become zero.
// The random number r in [0,1) is the low RW bits of a 32-bit Galois LFSR
// (polynomial 0x80200003), compared exactly as |g| * 2^RW > tau * r.
// Interface: g_hat is combinational from g, tau and en; step advances the
// generator by one (assert it once per gradient consumed). pruned flags a
// value below the threshold (whether it became 0 or +-tau).
// The rule follows the paper's pruning algorithm; the LFSR and the widths
// are this design's choices.
module stochastic_pruner #(
  parameter int          DW   = 16,
  parameter int          RW   = 16,
  parameter logic [31:0] SEED = 32'h1234_5678
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 en,
  input  logic                 step,
  input  logic [DW-1:0]        tau,     // threshold magnitude
  input  logic signed [DW-1:0] g,
  output logic signed [DW-1:0] g_hat,
  output logic                 pruned,
  output logic [RW-1:0]        rnd
);
  logic [31:0] lfsr;
  logic [DW:0] mag;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)    lfsr <= SEED;
    else if (step) lfsr <= (lfsr >> 1) ^ (lfsr[0] ? 32'h8020_0003 : 32'h0);
  end
  assign rnd = lfsr[RW-1:0];

  assign mag = g[DW-1] ? (DW+1)'(-(DW+1)'(signed'(g))) : (DW+1)'(g);

  logic [DW+RW:0] lhs, rhs;
  assign lhs = (DW+RW+1)'(mag) << RW;
  assign rhs = (DW+RW+1)'(tau) * (DW+RW+1)'(rnd);

  always_comb begin
    pruned = en && (mag < (DW+1)'(tau));
    g_hat  = g;
    if (pruned) begin
      if (lhs > rhs) g_hat = g[DW-1] ? -signed'(tau) : signed'(tau);
      else           g_hat = '0;
    end
  end
endmodule
