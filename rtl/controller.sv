// Controller of the accelerator.
//
// The host (CPU) programs it through a small register file:
//   write 0  CMD     bit0 run a job, bit1 end of batch (determine the
//                    layer's threshold from A and push it), bit2 clear A
//   write 1  CFG     [15:0] output row length, [17:16] operation
//                    (0 SRC, 1 MSRC, 2 OSRC), [21:18] K, [25:22] padding,
//                    [28:26] dense flags of Port-1/2/3, [29] ReLU,
//                    [30] pruning requested
//   write 2  JOB     [15:0] descriptor address in every bank,
//                    [31:16] number of active groups (groups 0..n-1)
//   write 3  LAYER   [7:0] CONV layer, [31:8] threshold coefficient
//                    |Phi^-1((1-p)/2)|*sqrt(2/pi)/n with 24 fraction bits
//   read  0  status  {.., full, busy}   1/2 A low/high   3 bias-gradient
//            sum of the last job   4 {tau_det, tau_pred}   5 cycles of
//            the last job
// A job: one cycle clearing the PPU accumulators, one cycle of start to
// every active group and its stream engine, then waiting until all of them
// report done. The PPU accumulators of all groups are then added into A
// (sum of |g|, for the threshold) and into the bias-gradient sum.
// Pruning is applied only when requested and the layer's threshold FIFO
// is full, with the FIFO's mean as threshold.
// The paper names the controller and its links to the CPU and the PPUs
// (ReLU select, accumulators); the register interface stands in for the
// paper's instruction set, which it does not give.
module controller
  import st_pkg::*;
#(
  parameter int NG      = 56,
  parameter int NLAYERS = 256,
  parameter int NF      = 4
) (
  input  logic clk,
  input  logic rst_n,
  input  logic        host_wr,
  input  logic [3:0]  host_addr,
  input  logic [31:0] host_wdata,
  output logic [31:0] host_rdata,
  output logic        busy,
  output logic        job_done,   // one cycle when a job's results are collected
  // to the groups
  output logic [NG-1:0] grp_start,
  output logic [15:0]   desc_ptr,
  output pe_cfg_t       pe_cfg,
  output logic          relu_en,
  output logic          prune_en,
  output logic [DATA_W-1:0] tau,
  output logic          acc_clr,
  input  logic [NG-1:0] grp_done,
  input  logic signed [ACC_W-1:0] acc_sum [NG],
  input  logic [ACC_W-1:0] acc_abs [NG]
);
  typedef enum logic [1:0] {C_IDLE, C_CLR, C_RUN, C_SUM} cstate_e;
  cstate_e st;

  logic [31:0] cfg_r, job_r, layer_r;
  logic [NG-1:0] active, fin;
  logic [ACC_W-1:0] a_acc;
  logic signed [ACC_W-1:0] bias_r;
  logic [31:0] cycles;
  logic push, full;
  logic [DATA_W-1:0] tau_det, tau_pred;

  threshold_predictor #(.NF(NF), .NLAYERS(NLAYERS), .TAU_W(DATA_W), .A_W(ACC_W), .COEF_W(24), .COEF_FRAC(24)) u_thr (
    .clk, .rst_n, .layer(layer_r[$clog2(NLAYERS)-1:0]), .push, .a_sum(a_acc),
    .coef(layer_r[31:8]), .tau_det, .tau_pred, .full);

  always_comb begin
    pe_cfg.out_len  = cfg_r[15:0];
    pe_cfg.op       = op_e'(cfg_r[17:16]);
    pe_cfg.k        = cfg_r[21:18];
    pe_cfg.pad      = cfg_r[25:22];
    pe_cfg.p1_dense = cfg_r[26];
    pe_cfg.p2_dense = cfg_r[27];
    pe_cfg.p3_dense = cfg_r[28];
  end
  assign relu_en  = cfg_r[29];
  assign prune_en = cfg_r[30] && full;
  assign tau      = tau_pred;
  assign desc_ptr = job_r[15:0];
  assign busy     = (st != C_IDLE);
  assign job_done = (st == C_SUM);
  assign push     = host_wr && host_addr == 4'd0 && host_wdata[1] && st == C_IDLE;

  // sum of all groups' accumulators
  logic [ACC_W-1:0] abs_tot;
  logic signed [ACC_W-1:0] sum_tot;
  always_comb begin
    abs_tot = '0; sum_tot = '0;
    for (int g = 0; g < NG; g++)
      if (active[g]) begin abs_tot += acc_abs[g]; sum_tot += acc_sum[g]; end
  end

  always_comb begin
    unique case (host_addr)
      4'd0:    host_rdata = {30'd0, full, busy};
      4'd1:    host_rdata = a_acc[31:0];
      4'd2:    host_rdata = 32'(a_acc[ACC_W-1:32]);
      4'd3:    host_rdata = bias_r[31:0];
      4'd4:    host_rdata = {tau_det, tau_pred};
      4'd5:    host_rdata = cycles;
      default: host_rdata = '0;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= C_IDLE; cfg_r <= '0; job_r <= '0; layer_r <= '0; active <= '0; fin <= '0;
      a_acc <= '0; bias_r <= '0; cycles <= '0; grp_start <= '0; acc_clr <= 1'b0;
    end else begin
      grp_start <= '0; acc_clr <= 1'b0;
      if (host_wr && st == C_IDLE) begin
        unique case (host_addr)
          4'd0: begin
            if (host_wdata[0]) begin
              st <= C_CLR; acc_clr <= 1'b1; cycles <= '0;
              for (int g = 0; g < NG; g++) active[g] <= (g < int'(job_r[31:16]));
            end
            if (host_wdata[1] || host_wdata[2]) a_acc <= '0;
          end
          4'd1: cfg_r   <= host_wdata;
          4'd2: job_r   <= host_wdata;
          4'd3: layer_r <= host_wdata;
          default: ;
        endcase
      end
      if (st != C_IDLE) cycles <= cycles + 1'b1;
      unique case (st)
        C_CLR: begin grp_start <= active; fin <= ~active; st <= C_RUN; end
        C_RUN: begin
          fin <= fin | grp_done;
          if (&(fin | grp_done)) st <= C_SUM;
        end
        C_SUM: begin
          a_acc  <= a_acc + abs_tot;
          bias_r <= sum_tot;
          st <= C_IDLE;
        end
        default: ;
      endcase
    end
  end

  a_no_cmd_when_busy: assert property (@(posedge clk) disable iff (!rst_n) busy |-> !(host_wr && host_addr == 4'd0));
endmodule
