// Post Processing Unit of a PE group.
//
// Receives the group's output row as a stream of 32-bit partial sums and
// does all point-wise work before the row goes back to the buffer:
//   1. ReLU or bypass, chosen by the controller ("Need ReLU?");
//   2. rescale to the 16-bit format (arithmetic shift by FRAC, saturate);
//   3. accumulate the value and its absolute value into two registers,
//      which the controller reads as the bias gradient and as the sum A
//      that determines the next pruning threshold;
//   4. stochastic pruning with the predicted threshold, when enabled;
//   5. format conversion: only non-zeros leave, as {index, value} words.
//      The row's last word is always sent (as a zero-valued end marker
//      when the last value is zero) and carries out_last.
// Interface: start (one cycle) latches the configuration with the row
// length; the psum input is accepted one value per cycle; outputs pass
// through a 2-entry register FIFO; done pulses when the last value has
// been accepted. acc_clr clears the accumulators, which otherwise keep
// adding over rows. pruned_fire and relu_fire pulse per value affected.
// ReLU/bypass mux, accumulator and format converter follow the paper's PPU;
// the place of the pruner, the rescaling and the output format are this
// design's choices.
module ppu
  import st_pkg::*;
#(
  parameter logic [31:0] SEED = 32'h1234_5678
) (
  input  logic clk,
  input  logic rst_n,
  input  logic start,
  input  ppu_cfg_t cfg,
  input  logic [DATA_W-1:0] tau,
  input  logic acc_clr,
  input  logic psum_valid, input logic signed [PSUM_W-1:0] psum, output logic psum_ready,
  output logic out_valid, output logic [WORD_W-1:0] out_word, output logic out_last, input logic out_ready,
  output logic signed [ACC_W-1:0] acc_sum,
  output logic [ACC_W-1:0] acc_abs,
  output logic busy,
  output logic done,
  output logic pruned_fire,
  output logic relu_fire
);
  ppu_cfg_t c;
  logic [IDX_W-1:0] pos;
  logic signed [PSUM_W-1:0] y;
  logic signed [PSUM_W-1:0] sh;
  logic signed [DATA_W-1:0] q, g_hat;
  logic is_last, fire, send, pruned, f_ready;

  // ReLU / bypass
  assign relu_fire = fire && c.relu_en && psum < 0;
  assign y  = (c.relu_en && psum < 0) ? '0 : psum;
  // rescale and saturate
  assign sh = y >>> FRAC;
  always_comb begin
    if (sh > PSUM_W'(32767))       q = 16'sh7fff;
    else if (sh < -PSUM_W'(32768)) q = -16'sh8000;
    else                           q = sh[DATA_W-1:0];
  end

  stochastic_pruner #(.DW(DATA_W), .RW(16), .SEED(SEED)) u_prune (
    .clk, .rst_n, .en(c.prune_en), .step(fire), .tau, .g(q), .g_hat, .pruned, .rnd());

  // format conversion
  assign is_last    = (pos == c.out_len - 1'b1);
  assign send       = (g_hat != 0) || is_last;
  assign psum_ready = busy && (f_ready || !send);
  assign fire       = psum_valid && psum_ready;
  assign pruned_fire = fire && pruned;

  stream_fifo #(.W(WORD_W + 1), .DEPTH(2)) u_out (.clk, .rst_n,
    .in_valid(fire && send), .in_data({is_last, pack_elem(pos, g_hat)}), .in_ready(f_ready),
    .out_valid, .out_data({out_last, out_word}), .out_ready, .count());

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      c <= '0; pos <= '0; busy <= 1'b0; done <= 1'b0; acc_sum <= '0; acc_abs <= '0;
    end else begin
      done <= 1'b0;
      if (start) begin c <= cfg; pos <= '0; busy <= 1'b1; end
      if (fire) begin
        pos <= pos + 1'b1;
        if (is_last) begin busy <= 1'b0; done <= 1'b1; end
      end
      if (acc_clr) begin
        acc_sum <= '0; acc_abs <= '0;
      end else if (fire) begin
        acc_sum <= acc_sum + ACC_W'(q);
        acc_abs <= acc_abs + ((q < 0) ? -(ACC_W'(q)) : ACC_W'(q));
      end
    end
  end

  a_len: assert property (@(posedge clk) disable iff (!rst_n) start |-> cfg.out_len != '0);
endmodule
