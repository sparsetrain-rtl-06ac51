// Stream engine between a PE group and its buffer bank.
//
// On start it reads the job descriptor (10 words at desc_ptr) from the
// bank: word 3*p+q-1 = {length[31:16], base[15:0]} of the row that PE p
// reads on Port-q, word 9 = {unused, output base}. It then feeds the nine
// operand streams: each has a 2-word FIFO, and one bank read per cycle is
// issued round-robin to a stream that has words left and room for them.
// The word that ends a stream carries "last". At the same time every word
// the PPU sends is written to consecutive addresses from the output base.
// When the group has finished and the PPU's last word has been written, the
// number of words written replaces the unused half of descriptor word 9
// ({count, output base}), so the host and the next layer know the length
// of the compressed result row; done then pulses and out_count holds the
// same count.
// Timing: reads return one cycle after issue; a stream can receive one
// word per cycle when the others are idle.
// The paper only draws a bus between the buffer and the groups; this
// descriptor-driven engine is this design's choice.
module group_dma
  import st_pkg::*;
#(
  parameter int AW = 11
) (
  input  logic clk,
  input  logic rst_n,
  input  logic start,
  input  logic [AW-1:0] desc_ptr,
  // bank ports
  output logic          rd_en,
  output logic [AW-1:0] rd_addr,
  input  logic [31:0]   rd_data,
  output logic          wr_en,
  output logic [AW-1:0] wr_addr,
  output logic [31:0]   wr_data,
  // operand streams to the group
  output logic [NPORTS-1:0] s_valid,
  output logic [WORD_W-1:0] s_word [NPORTS],
  output logic [NPORTS-1:0] s_last,
  input  logic [NPORTS-1:0] s_ready,
  // PPU output
  input  logic in_valid, input logic [WORD_W-1:0] in_word, input logic in_last, output logic in_ready,
  input  logic grp_done,
  output logic busy,
  output logic done,
  output logic [AW-1:0] out_count
);
  typedef enum logic [1:0] {D_IDLE, D_DESC, D_RUN, D_FIN} dstate_e;
  dstate_e st;

  logic [3:0]  dcnt;                  // descriptor words issued
  logic        dpend;                 // descriptor read in flight
  logic [3:0]  didx;
  logic [15:0] base [NPORTS];
  logic [15:0] rem  [NPORTS];
  logic [AW-1:0] obase;
  logic [NPORTS-1:0] f_push, f_ready;
  logic [1:0]  f_cnt [NPORTS];
  logic        pend;                  // stream read in flight
  logic [3:0]  pch;                   // its stream
  logic        plast;
  logic [3:0]  rr;                    // round-robin pointer
  logic        g_fin, w_fin;

  // choose a stream to read
  logic        issue;
  logic [3:0]  ich;
  always_comb begin
    int ch;
    issue = 1'b0; ich = '0; ch = 0;
    if (st == D_RUN)
      for (int n = 0; n < NPORTS; n++) begin
        ch = (int'(rr) + n) % NPORTS;
        if (!issue && rem[ch] != 0 &&
            (int'(f_cnt[ch]) + ((pend && int'(pch) == ch) ? 1 : 0)) < 2) begin
          issue = 1'b1; ich = 4'(ch);
        end
      end
  end

  assign rd_en   = (st == D_DESC && dcnt < 4'd10) || issue;
  assign rd_addr = (st == D_DESC) ? desc_ptr + AW'(dcnt) : AW'(base[ich]);

  for (genvar i = 0; i < NPORTS; i++) begin : g_fifo
    assign f_push[i] = pend && (pch == 4'(i));
    stream_fifo #(.W(WORD_W + 1), .DEPTH(2)) u_f (.clk, .rst_n,
      .in_valid(f_push[i]), .in_data({plast, rd_data}), .in_ready(f_ready[i]),
      .out_valid(s_valid[i]), .out_data({s_last[i], s_word[i]}), .out_ready(s_ready[i]),
      .count(f_cnt[i]));
  end

  // output writes
  assign in_ready = (st == D_RUN);
  assign wr_en    = (in_valid && in_ready) || (st == D_FIN);
  assign wr_addr  = (st == D_FIN) ? desc_ptr + AW'(9) : obase + out_count;
  assign wr_data  = (st == D_FIN) ? {16'(out_count), 16'(obase)} : in_word;
  assign busy     = (st != D_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= D_IDLE; dcnt <= '0; dpend <= 1'b0; didx <= '0; obase <= '0; pend <= 1'b0; pch <= '0;
      plast <= 1'b0; rr <= '0; g_fin <= 1'b0; w_fin <= 1'b0; done <= 1'b0; out_count <= '0;
      for (int i = 0; i < NPORTS; i++) begin base[i] <= '0; rem[i] <= '0; end
    end else begin
      done <= 1'b0;
      pend <= 1'b0;
      case (st)
        D_IDLE: if (start) begin
          st <= D_DESC; dcnt <= '0; dpend <= 1'b0; out_count <= '0; g_fin <= 1'b0; w_fin <= 1'b0;
        end
        D_DESC: begin
          if (dcnt < 4'd10) dcnt <= dcnt + 1'b1;
          dpend <= (dcnt < 4'd10);
          didx  <= dcnt;
          if (dpend) begin
            if (didx == 4'd9) begin
              obase <= AW'(rd_data[15:0]);
              st <= D_RUN;
            end else begin
              base[didx] <= rd_data[15:0];
              rem[didx]  <= rd_data[31:16];
            end
          end
        end
        D_RUN: begin
          if (issue) begin
            pend  <= 1'b1; pch <= ich; plast <= (rem[ich] == 16'd1);
            base[ich] <= base[ich] + 1'b1;
            rem[ich]  <= rem[ich] - 1'b1;
            rr <= (ich == 4'(NPORTS - 1)) ? '0 : ich + 1'b1;
          end
          if (wr_en) out_count <= out_count + 1'b1;
          if (grp_done) g_fin <= 1'b1;
          if (wr_en && in_last) w_fin <= 1'b1;
          if ((g_fin || grp_done) && (w_fin || (wr_en && in_last))) st <= D_FIN;
        end
        D_FIN: begin st <= D_IDLE; done <= 1'b1; end
        default: st <= D_IDLE;
      endcase
    end
  end

  a_fifo_room: assert property (@(posedge clk) disable iff (!rst_n) pend |-> f_ready[pch]);
endmodule
