// Processing element: one complete 1-D (row) convolution per operation.
//
// Three operand ports, each behind a format converter that drops zeros:
//   SRC  (Forward): Port-2 loads one kernel row w[0..K-1] into Reg-1, then
//        the non-zero activations of one input row stream in on Port-1.
//        Each operand is multiplied by all K weights in one cycle and the
//        K products are added into Reg-2, a sliding window of the K output
//        partial sums it can reach. An output leaves (through the data
//        merger, adding the Psum input) once the next operand can no longer
//        reach it, so the cycle count is about nnz(input) + output length.
//   MSRC (GTA): as SRC with the kernel row reversed (the 180-degree rotated
//        kernel) on the output-activation-gradient row, plus a mask: Port-3
//        streams the positions of the non-zero forward activations. Outputs
//        at other positions are sent as zero, and an operand whose K outputs
//        are all masked is consumed without a multiply.
//   OSRC (GTW): Port-1 streams the activations I, Port-2 the gradients dO.
//        Reg-1 holds a K-entry window of dO around the current I position
//        (runs of zeros longer than K are jumped over in one cycle), each I
//        operand is multiplied with the K window values and added into
//        Reg-2, which keeps the K weight gradients until the row ends. The
//        K results then leave on Psum output; a PE at chain position n first
//        forwards the n*K results of the PEs below it.
// Timing: one operand or one output per cycle; start is a one-cycle pulse,
// done a one-cycle pulse after the last output and after all three operand
// streams have been read to their "last" word.
// Follows the paper: the three ports with converters, Reg-1, the K-wide
// MAC, Reg-2, the data merger and the 0/Psum-input mux, and the three
// operations. This design's own choices: the sliding-window retirement,
// the mask held as a stream head, stride 1 only, masked outputs sent as 0.
module pe
  import st_pkg::*;
#(
  parameter int KM = KMAX
) (
  input  logic clk,
  input  logic rst_n,
  input  logic start,
  input  pe_cfg_t cfg,
  input  logic [1:0] chain_pos,   // 0: bottom PE, Psum mux selects 0
  // Port-1
  input  logic p1_valid, input logic [WORD_W-1:0] p1_word, input logic p1_last, output logic p1_ready,
  // Port-2
  input  logic p2_valid, input logic [WORD_W-1:0] p2_word, input logic p2_last, output logic p2_ready,
  // Port-3
  input  logic p3_valid, input logic [WORD_W-1:0] p3_word, input logic p3_last, output logic p3_ready,
  // Psum input (from the PE below) and output
  input  logic psum_in_valid, input logic signed [PSUM_W-1:0] psum_in, output logic psum_in_ready,
  output logic psum_out_valid, output logic signed [PSUM_W-1:0] psum_out, input logic psum_out_ready,
  output logic busy,
  output logic done,
  output logic mac_fire,          // a multiply-accumulate step happened
  output logic skip_fire          // MSRC operand skipped by the mask
);
  localparam int PW = IDX_W + 2;  // signed position width

  typedef enum logic [2:0] {S_IDLE, S_LOADW, S_RUN, S_FLUSH, S_EMIT, S_DRAIN} state_e;
  state_e state;
  pe_cfg_t c;
  logic [1:0] pos;

  // converted ports
  logic e1_v, e1_nz, e1_last, e1_rdy; logic signed [DATA_W-1:0] e1_val; logic [IDX_W-1:0] e1_idx;
  logic e2_v, e2_nz, e2_last, e2_rdy; logic signed [DATA_W-1:0] e2_val; logic [IDX_W-1:0] e2_idx;
  logic e3_v, e3_nz, e3_last, e3_rdy; logic signed [DATA_W-1:0] e3_val; logic [IDX_W-1:0] e3_idx;

  format_converter u_fc1 (.clk, .rst_n, .dense(c.p1_dense), .in_valid(p1_valid), .in_word(p1_word),
    .in_last(p1_last), .in_ready(p1_ready), .out_valid(e1_v), .out_val(e1_val), .out_idx(e1_idx),
    .out_nz(e1_nz), .out_last(e1_last), .out_ready(e1_rdy));
  format_converter u_fc2 (.clk, .rst_n, .dense(c.p2_dense), .in_valid(p2_valid), .in_word(p2_word),
    .in_last(p2_last), .in_ready(p2_ready), .out_valid(e2_v), .out_val(e2_val), .out_idx(e2_idx),
    .out_nz(e2_nz), .out_last(e2_last), .out_ready(e2_rdy));
  format_converter u_fc3 (.clk, .rst_n, .dense(c.p3_dense), .in_valid(p3_valid), .in_word(p3_word),
    .in_last(p3_last), .in_ready(p3_ready), .out_valid(e3_v), .out_val(e3_val), .out_idx(e3_idx),
    .out_nz(e3_nz), .out_last(e3_last), .out_ready(e3_rdy));

  logic signed [DATA_W-1:0] reg1 [KM];   // Reg-1: K operands
  logic signed [PSUM_W-1:0] reg2 [KM];   // Reg-2: K partial sums
  logic signed [PW-1:0] base;            // output position of reg2[0] (SRC/MSRC)
  logic signed [PW-1:0] top;             // dO position of reg1[0] (OSRC)
  logic p2_done, p3_done;
  logic [5:0] ecnt;                      // OSRC emit counter

  // ---------------- position arithmetic ----------------
  function automatic logic signed [PW-1:0] spos(input logic [IDX_W-1:0] i);
    return signed'({2'b00, i});
  endfunction
  logic signed [PW-1:0] kk, t, lo, olen, head2, tgt;
  logic                 mask_known, in_mask, m_valid;
  assign kk   = signed'(PW'(c.k));
  assign olen = spos(c.out_len);
  // operand position in output coordinates
  always_comb begin
    if (c.op == OP_MSRC) t = spos(e1_idx) + kk - 1 - signed'(PW'(c.pad));
    else                 t = spos(e1_idx) + signed'(PW'(c.pad));
  end
  assign lo = t - kk + 1;
  assign m_valid    = e3_v && e3_nz;
  assign mask_known = m_valid || p3_done;
  assign in_mask    = m_valid && (spos(e3_idx) == base);
  assign head2 = (e2_v && e2_nz) ? spos(e2_idx) : t;      // next dO position
  assign tgt   = (head2 < t) ? head2 : t;

  // ---------------- control decode ----------------
  logic psum_sel, retire_ok, do_retire, do_acc, do_skip, do_drop, w_load;
  logic o_step, o_jump, o_acc, emit_fire, fwd_phase, k2_need;
  logic [5:0] fwd_n;
  logic mo_valid, of_ready;
  logic signed [PSUM_W-1:0] mo_data;
  assign psum_sel  = (pos != 2'd0);
  assign fwd_n     = 6'(pos) * 6'(c.k);
  assign fwd_phase = (ecnt < fwd_n);
  assign retire_ok = of_ready && (!psum_sel || psum_in_valid) && (c.op != OP_MSRC || mask_known);

  always_comb begin
    do_retire = 1'b0; do_acc = 1'b0; do_skip = 1'b0; do_drop = 1'b0; w_load = 1'b0;
    o_step = 1'b0; o_jump = 1'b0; o_acc = 1'b0; emit_fire = 1'b0; k2_need = 1'b0;
    unique case (state)
      S_LOADW: w_load = e2_v;
      S_RUN: if (c.op == OP_OSRC) begin
        if (e1_v && e1_nz) begin
          if (top < t) begin
            if ((e2_v && e2_nz) || p2_done || (e2_v && !e2_nz)) begin
              if (tgt - 1 - top >= kk) o_jump = 1'b1;
              else                     o_step = 1'b1;
            end
          end else o_acc = 1'b1;
        end
      end else begin
        if (e1_v && e1_nz) begin
          if (lo > base) begin
            if (base < olen) do_retire = retire_ok;
            else             do_drop = 1'b1;
          end else if (c.op == OP_MSRC) begin
            if (mask_known) begin
              if (!m_valid || spos(e3_idx) > t) do_skip = 1'b1;
              else                              do_acc  = 1'b1;
            end
          end else do_acc = 1'b1;
        end
      end
      S_FLUSH: do_retire = (base < olen) && retire_ok;
      S_EMIT:  emit_fire = of_ready && (!fwd_phase || psum_in_valid);
      default: ;
    endcase
    k2_need = o_step && (e2_v && e2_nz) && (spos(e2_idx) == top + 1);
  end

  // port handshakes
  assign e1_rdy = (state == S_RUN) && e1_v && (!e1_nz || do_acc || do_skip || do_drop || o_acc);
  assign e2_rdy = w_load || k2_need || (e2_v && !e2_nz && state != S_IDLE) ||
                  (state == S_DRAIN && e2_v);
  assign e3_rdy = (e3_v && !e3_nz && state != S_IDLE) ||
                  (do_retire && in_mask) || (state == S_DRAIN && e3_v);

  // data merger: Reg-2 head plus the Psum input (or 0), into a 2-entry
  // output register so that Psum output never waits combinationally
  always_comb begin
    mo_valid = 1'b0; mo_data = '0;
    if (state == S_EMIT) begin
      mo_valid = emit_fire;
      mo_data  = fwd_phase ? psum_in : reg2[4'(ecnt - fwd_n)];
    end else if ((state == S_RUN || state == S_FLUSH) && c.op != OP_OSRC) begin
      mo_valid = do_retire;
      if (c.op == OP_MSRC && !in_mask) mo_data = '0;
      else mo_data = reg2[0] + (psum_sel ? psum_in : '0);
    end
  end
  stream_fifo #(.W(PSUM_W), .DEPTH(2)) u_out (.clk, .rst_n, .in_valid(mo_valid), .in_data(mo_data),
    .in_ready(of_ready), .out_valid(psum_out_valid), .out_data(psum_out), .out_ready(psum_out_ready),
    .count());
  assign psum_in_ready = (do_retire && psum_sel) || (emit_fire && fwd_phase);

  assign busy      = (state != S_IDLE);
  assign mac_fire  = do_acc || o_acc;
  assign skip_fire = do_skip;

  // ---------------- datapath registers ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; c <= '0; pos <= '0; base <= '0; top <= '0;
      p2_done <= 1'b0; p3_done <= 1'b0; ecnt <= '0; done <= 1'b0;
      for (int i = 0; i < KM; i++) begin reg1[i] <= '0; reg2[i] <= '0; end
    end else begin
      done <= 1'b0;
      if (e2_v && e2_rdy && e2_last) p2_done <= 1'b1;
      if (e3_v && e3_rdy && e3_last) p3_done <= 1'b1;
      unique case (state)
        S_IDLE: if (start) begin
          c <= cfg; pos <= chain_pos; base <= '0; top <= -1; ecnt <= '0;
          p2_done <= 1'b0;
          p3_done <= (cfg.op != OP_MSRC);   // Port-3 is only read in MSRC
          for (int i = 0; i < KM; i++) begin reg1[i] <= '0; reg2[i] <= '0; end
          state <= (cfg.op == OP_OSRC) ? S_RUN : S_LOADW;
        end
        S_LOADW: if (e2_v) begin
          if (e2_nz) begin
            if (c.op == OP_MSRC) reg1[4'(c.k - 1'b1 - 4'(e2_idx))] <= e2_val;
            else                 reg1[4'(e2_idx)] <= e2_val;
          end
          if (e2_last) state <= S_RUN;
        end
        S_RUN: begin
          if (do_retire) begin
            for (int i = 0; i < KM - 1; i++) reg2[i] <= reg2[i+1];
            reg2[KM-1] <= '0;
            base <= base + 1;
          end
          if (do_acc) begin
            for (int i = 0; i < KM; i++) begin
              logic signed [PW-1:0] j;
              j = t - base - signed'(PW'(i));
              if (i < int'(c.k) && j >= 0 && j < kk)
                reg2[i] <= reg2[i] + PSUM_W'(e1_val * reg1[4'(j)]);
            end
          end
          if (o_jump) begin
            top <= tgt - 1;
            for (int i = 0; i < KM; i++) reg1[i] <= '0;
          end
          if (o_step) begin
            top <= top + 1;
            for (int i = KM - 1; i > 0; i--) reg1[i] <= reg1[i-1];
            reg1[0] <= k2_need ? e2_val : '0;
          end
          if (o_acc)
            for (int i = 0; i < KM; i++)
              if (i < int'(c.k)) reg2[i] <= reg2[i] + PSUM_W'(e1_val * reg1[i]);
          if (e1_v && e1_rdy && e1_last)
            state <= (c.op == OP_OSRC) ? S_EMIT : S_FLUSH;
        end
        S_FLUSH: begin
          if (do_retire) begin
            for (int i = 0; i < KM - 1; i++) reg2[i] <= reg2[i+1];
            reg2[KM-1] <= '0;
            base <= base + 1;
          end
          if (base >= olen) state <= S_DRAIN;
        end
        S_EMIT: if (emit_fire) begin
          ecnt <= ecnt + 1'b1;
          if (ecnt == fwd_n + 6'(c.k) - 1'b1) state <= S_DRAIN;
        end
        S_DRAIN: if ((p2_done || (e2_v && e2_rdy && e2_last)) && (p3_done || (e3_v && e3_rdy && e3_last))) begin
          state <= S_IDLE; done <= 1'b1;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // kernel rows longer than Reg-1 are not supported
  a_k: assert property (@(posedge clk) disable iff (!rst_n) start |-> (cfg.k >= 1 && int'(cfg.k) <= KM));
endmodule
