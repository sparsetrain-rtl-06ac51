// Sparse CNN training accelerator: top level.
//
// A controller, a global buffer and NG PE groups. Each group has three
// PEs and a post-processing unit, plus a stream engine that moves its
// operand rows out of, and its result rows back into, its own bank of the
// buffer. At the defaults there are 56 groups (168 PEs) and 386 KB of
// buffer. The CPU programs the controller through the host register port
// and, while the accelerator is idle, moves data between off-chip DRAM and
// the buffer through the host buffer port; neither the CPU nor the DRAM is
// part of this design.
// One job runs the same row operation (SRC, MSRC or OSRC, see pe.sv) with
// the same kernel size in every active group; each group reads its own
// descriptor at the same address of its bank. done_irq pulses when a job
// has finished.
module sparsetrain_top
  import st_pkg::*;
#(
  parameter int NG         = 56,
  parameter int BANK_DEPTH = 1765,
  parameter int KM         = KMAX,
  parameter int NLAYERS    = 256,
  parameter int NF         = 4,
  parameter int AW         = $clog2(BANK_DEPTH),
  parameter int BW         = (NG > 1) ? $clog2(NG) : 1
) (
  input  logic clk,
  input  logic rst_n,
  // CPU: controller registers
  input  logic        host_reg_wr,
  input  logic [3:0]  host_reg_addr,
  input  logic [31:0] host_reg_wdata,
  output logic [31:0] host_reg_rdata,
  // CPU / DRAM: buffer access while idle
  input  logic          host_buf_en,
  input  logic          host_buf_we,
  input  logic [BW-1:0] host_buf_bank,
  input  logic [AW-1:0] host_buf_addr,
  input  logic [31:0]   host_buf_wdata,
  output logic [31:0]   host_buf_rdata,
  output logic          busy,
  output logic          done_irq
);
  logic [NG-1:0] grp_start, grp_done, dma_done;
  logic [15:0] desc_ptr;
  pe_cfg_t pe_cfg;
  logic relu_en, prune_en, acc_clr, job_done;
  logic [DATA_W-1:0] tau;
  logic signed [ACC_W-1:0] acc_sum [NG];
  logic [ACC_W-1:0] acc_abs [NG];

  logic          rd_en [NG], wr_en [NG];
  logic [AW-1:0] rd_addr [NG], wr_addr [NG];
  logic [31:0]   rd_data [NG], wr_data [NG];

  controller #(.NG(NG), .NLAYERS(NLAYERS), .NF(NF)) u_ctrl (
    .clk, .rst_n, .host_wr(host_reg_wr), .host_addr(host_reg_addr), .host_wdata(host_reg_wdata),
    .host_rdata(host_reg_rdata), .busy, .job_done, .grp_start, .desc_ptr, .pe_cfg, .relu_en, .prune_en, .tau,
    .acc_clr, .grp_done(dma_done), .acc_sum, .acc_abs);

  global_buffer #(.NG(NG), .BANK_DEPTH(BANK_DEPTH), .AW(AW), .BW(BW)) u_buf (
    .clk, .rst_n, .host_sel(!busy), .host_en(host_buf_en), .host_we(host_buf_we),
    .host_bank(host_buf_bank), .host_addr(host_buf_addr), .host_wdata(host_buf_wdata),
    .host_rdata(host_buf_rdata), .rd_en, .rd_addr, .rd_data, .wr_en, .wr_addr, .wr_data);

  for (genvar g = 0; g < NG; g++) begin : g_grp
    logic [NPORTS-1:0] s_valid, s_last, s_ready;
    logic [WORD_W-1:0] s_word [NPORTS];
    logic o_valid, o_last, o_ready;
    logic [WORD_W-1:0] o_word;

    group_dma #(.AW(AW)) u_dma (
      .clk, .rst_n, .start(grp_start[g]), .desc_ptr(desc_ptr[AW-1:0]),
      .rd_en(rd_en[g]), .rd_addr(rd_addr[g]), .rd_data(rd_data[g]),
      .wr_en(wr_en[g]), .wr_addr(wr_addr[g]), .wr_data(wr_data[g]),
      .s_valid, .s_word, .s_last, .s_ready,
      .in_valid(o_valid), .in_word(o_word), .in_last(o_last), .in_ready(o_ready),
      .grp_done(grp_done[g]), .busy(), .done(dma_done[g]), .out_count());

    pe_group #(.KM(KM)) u_grp (
      .clk, .rst_n, .start(grp_start[g]), .cfg(pe_cfg), .relu_en, .prune_en, .tau, .acc_clr,
      .s_valid, .s_word, .s_last, .s_ready,
      .out_valid(o_valid), .out_word(o_word), .out_last(o_last), .out_ready(o_ready),
      .acc_sum(acc_sum[g]), .acc_abs(acc_abs[g]), .busy(), .done(grp_done[g]),
      .mac_fire(), .skip_fire(), .pruned_fire(), .relu_fire());
  end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) done_irq <= 1'b0;
    else        done_irq <= job_done;
endmodule
