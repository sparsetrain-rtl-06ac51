// Format converter at a PE port.
//
// Turns a stream of 32-bit buffer words into (value, column index) elements
// for the PE datapath. In dense mode the word holds one value and the column
// index is counted; in compressed mode the word already holds {index, value}.
// Zero values are dropped here, so the datapath only ever sees non-zeros:
// this is where activation and gradient sparsity turn into skipped MACs.
// A zero word that carries the stream's "last" flag is passed on with
// out_nz = 0, so the consumer still learns that the row has ended.
//
// Interface: valid/ready on both sides, purely combinational (no added
// latency); the index counter restarts after each "last" word.
// The paper only names a Format Converter in front of each port; the
// decoding and zero dropping are this design's reading of that block.
module format_converter
  import st_pkg::*;
#(
  parameter int DW = DATA_W,
  parameter int IW = IDX_W
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          dense,
  input  logic          in_valid,
  input  logic [WORD_W-1:0] in_word,
  input  logic          in_last,
  output logic          in_ready,
  output logic          out_valid,
  output logic signed [DW-1:0] out_val,
  output logic [IW-1:0] out_idx,
  output logic          out_nz,
  output logic          out_last,
  input  logic          out_ready
);

  logic [IW-1:0] cnt;
  logic          is_zero;

  assign out_val  = in_word[DW-1:0];
  assign out_idx  = dense ? cnt : in_word[WORD_W-1 -: IW];
  assign is_zero  = (in_word[DW-1:0] == '0);
  assign out_nz   = !is_zero;
  assign out_last = in_last;
  // a zero that is not last is swallowed without bothering the consumer
  assign out_valid = in_valid && (!is_zero || in_last);
  assign in_ready  = out_ready || (is_zero && !in_last);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) cnt <= '0;
    else if (in_valid && in_ready) cnt <= in_last ? '0 : cnt + 1'b1;
  end

endmodule
