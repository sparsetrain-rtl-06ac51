// One bank of the on-chip global buffer (SRAM).
//
// DEPTH words of W bits with one synchronous read port (data one cycle
// after rd_en) and one write port. Written as an array so that synthesis
// can map it onto an SRAM macro; contents are not reset.
module buffer_bank #(
  parameter int W     = 32,
  parameter int DEPTH = 1765,
  parameter int AW    = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          rd_en,
  input  logic [AW-1:0] rd_addr,
  output logic [W-1:0]  rd_data,
  input  logic          wr_en,
  input  logic [AW-1:0] wr_addr,
  input  logic [W-1:0]  wr_data
);
  logic [W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (wr_en && int'(wr_addr) < DEPTH) mem[wr_addr] <= wr_data;
    if (rd_en) rd_data <= (int'(rd_addr) < DEPTH) ? mem[rd_addr] : '0;
  end
endmodule
