// PE group: three PEs and one post-processing unit.
//
// The PEs are chained through their psum ports: PE0 (chain position 0)
// adds nothing from below, PE1 adds PE0's outputs, PE2 adds PE1's, and
// PE2's psum output feeds the PPU. In SRC and MSRC the three PEs work on
// three kernel rows of the same output row, so the PPU sees the finished
// row (a 3-row kernel in one pass). In OSRC each PE produces the K weight
// gradients of its own row pair, and the chain hands the 3*K results to
// the PPU one PE after the other.
// Interface: start (one cycle) with the shared PE configuration and the
// PPU flags; nine operand streams (index 3*pe + port-1); one compressed
// output stream; done pulses once all three PEs and the PPU have finished.
// Three PEs and a PPU per group are the paper's; the psum chain order is
// this design's reading of the block diagram.
module pe_group
  import st_pkg::*;
#(
  parameter int          KM   = KMAX,
  parameter logic [31:0] SEED = 32'h1234_5678
) (
  input  logic clk,
  input  logic rst_n,
  input  logic start,
  input  pe_cfg_t cfg,
  input  logic relu_en,
  input  logic prune_en,
  input  logic [DATA_W-1:0] tau,
  input  logic acc_clr,
  input  logic [NPORTS-1:0] s_valid,
  input  logic [WORD_W-1:0] s_word [NPORTS],
  input  logic [NPORTS-1:0] s_last,
  output logic [NPORTS-1:0] s_ready,
  output logic out_valid, output logic [WORD_W-1:0] out_word, output logic out_last, input logic out_ready,
  output logic signed [ACC_W-1:0] acc_sum,
  output logic [ACC_W-1:0] acc_abs,
  output logic busy,
  output logic done,
  output logic [PES-1:0] mac_fire,
  output logic [PES-1:0] skip_fire,
  output logic pruned_fire,
  output logic relu_fire
);
  logic [PES:0] pv, pr;
  logic signed [PSUM_W-1:0] pd [PES+1];
  logic [PES-1:0] pe_done, fin;
  logic ppu_done, ppu_fin;
  ppu_cfg_t pcfg;

  assign pv[0] = 1'b0;
  assign pd[0] = '0;

  for (genvar i = 0; i < PES; i++) begin : g_pe
    pe #(.KM(KM)) u_pe (
      .clk, .rst_n, .start, .cfg, .chain_pos(2'(i)),
      .p1_valid(s_valid[3*i]),   .p1_word(s_word[3*i]),   .p1_last(s_last[3*i]),   .p1_ready(s_ready[3*i]),
      .p2_valid(s_valid[3*i+1]), .p2_word(s_word[3*i+1]), .p2_last(s_last[3*i+1]), .p2_ready(s_ready[3*i+1]),
      .p3_valid(s_valid[3*i+2]), .p3_word(s_word[3*i+2]), .p3_last(s_last[3*i+2]), .p3_ready(s_ready[3*i+2]),
      .psum_in_valid(pv[i]), .psum_in(pd[i]), .psum_in_ready(pr[i]),
      .psum_out_valid(pv[i+1]), .psum_out(pd[i+1]), .psum_out_ready(pr[i+1]),
      .busy(), .done(pe_done[i]), .mac_fire(mac_fire[i]), .skip_fire(skip_fire[i]));
  end

  always_comb begin
    pcfg.relu_en  = relu_en;
    pcfg.prune_en = prune_en;
    pcfg.out_len  = (cfg.op == OP_OSRC) ? IDX_W'(PES * int'(cfg.k)) : cfg.out_len;
  end

  ppu #(.SEED(SEED)) u_ppu (.clk, .rst_n, .start, .cfg(pcfg), .tau, .acc_clr,
    .psum_valid(pv[PES]), .psum(pd[PES]), .psum_ready(pr[PES]),
    .out_valid, .out_word, .out_last, .out_ready, .acc_sum, .acc_abs,
    .busy(), .done(ppu_done), .pruned_fire, .relu_fire);

  // completion: every unit reports done once per operation
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      fin <= '0; ppu_fin <= 1'b0; busy <= 1'b0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start) begin
        fin <= '0; ppu_fin <= 1'b0; busy <= 1'b1;
      end else if (busy) begin
        fin <= fin | pe_done;
        if (ppu_done) ppu_fin <= 1'b1;
        if (&(fin | pe_done) && (ppu_fin || ppu_done)) begin busy <= 1'b0; done <= 1'b1; end
      end
    end
  end

  // the bottom PE's Psum input is tied off (its mux selects 0)
  logic unused_pr0;
  assign unused_pr0 = pr[0];
endmodule
