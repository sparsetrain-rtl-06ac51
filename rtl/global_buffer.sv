// Global buffer: the accelerator's on-chip SRAM, one bank per PE group.
//
// NG banks of BANK_DEPTH 32-bit words (56 x 1765 x 4 B = 386 KB at the
// defaults). Each bank has a read port and a write port owned by its
// group's stream engine. While host_sel is high (the accelerator is idle)
// the host side - the path to the CPU and off-chip DRAM - owns the ports
// instead and reads or writes one word per cycle of the bank it names;
// host_rdata follows host_en by one cycle.
// The 386 KB size is the paper's; the banking and the host port are this
// design's choices.
module global_buffer #(
  parameter int NG         = 56,
  parameter int BANK_DEPTH = 1765,
  parameter int AW         = $clog2(BANK_DEPTH),
  parameter int BW         = (NG > 1) ? $clog2(NG) : 1
) (
  input  logic clk,
  input  logic rst_n,
  // host / DRAM side
  input  logic          host_sel,
  input  logic          host_en,
  input  logic          host_we,
  input  logic [BW-1:0] host_bank,
  input  logic [AW-1:0] host_addr,
  input  logic [31:0]   host_wdata,
  output logic [31:0]   host_rdata,
  // per-group ports
  input  logic          rd_en   [NG],
  input  logic [AW-1:0] rd_addr [NG],
  output logic [31:0]   rd_data [NG],
  input  logic          wr_en   [NG],
  input  logic [AW-1:0] wr_addr [NG],
  input  logic [31:0]   wr_data [NG]
);
  logic [BW-1:0] rd_bank_q;

  for (genvar b = 0; b < NG; b++) begin : g_bank
    logic hit;
    assign hit = host_sel && host_en && (host_bank == BW'(b));
    buffer_bank #(.W(32), .DEPTH(BANK_DEPTH), .AW(AW)) u_bank (
      .clk,
      .rd_en  (host_sel ? (hit && !host_we) : rd_en[b]),
      .rd_addr(host_sel ? host_addr : rd_addr[b]),
      .rd_data(rd_data[b]),
      .wr_en  (host_sel ? (hit && host_we) : wr_en[b]),
      .wr_addr(host_sel ? host_addr : wr_addr[b]),
      .wr_data(host_sel ? host_wdata : wr_data[b]));
  end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) rd_bank_q <= '0;
    else if (host_en && !host_we) rd_bank_q <= host_bank;
  assign host_rdata = rd_data[rd_bank_q];
endmodule
