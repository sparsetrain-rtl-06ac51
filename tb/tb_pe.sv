// Self-checking test of the PE: random SRC, MSRC and OSRC row operations on
// sparse rows, with and without the Psum input, against a direct evaluation
// of the convolution sums. Also checks that the number of cycles of an SRC
// row stays near nnz(input) + output length (sparsity is exploited) and that
// MSRC skips masked operands.
module tb_pe;
  import st_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic start; pe_cfg_t cfg; logic [1:0] chain_pos;
  logic p1_valid, p1_last, p1_ready, p2_valid, p2_last, p2_ready, p3_valid, p3_last, p3_ready;
  logic [WORD_W-1:0] p1_word, p2_word, p3_word;
  logic psum_in_valid, psum_in_ready, psum_out_valid, psum_out_ready, busy, done, mac_fire, skip_fire;
  logic signed [PSUM_W-1:0] psum_in, psum_out;

  pe dut (.*);

  // stream sources (driven on the falling edge, sampled on the rising edge)
  logic [WORD_W-1:0] q1[$], q2[$], q3[$];
  logic signed [PSUM_W-1:0] qp[$], got[$];
  int n_skip, n_mac;

  always @(negedge clk) begin
    if (!(p1_valid && !p1_ready_s)) begin
      p1_valid <= (q1.size() > 0) && ($urandom_range(0, 4) != 0);
    end
    if (!(p2_valid && !p2_ready_s)) p2_valid <= (q2.size() > 0) && ($urandom_range(0, 4) != 0);
    if (!(p3_valid && !p3_ready_s)) p3_valid <= (q3.size() > 0) && ($urandom_range(0, 4) != 0);
    if (!(psum_in_valid && !pin_ready_s)) psum_in_valid <= (qp.size() > 0) && ($urandom_range(0, 4) != 0);
    psum_out_ready <= ($urandom_range(0, 5) != 0);
  end
  always_comb begin
    p1_word = q1.size() > 0 ? q1[0] : '0; p1_last = (q1.size() == 1);
    p2_word = q2.size() > 0 ? q2[0] : '0; p2_last = (q2.size() == 1);
    p3_word = q3.size() > 0 ? q3[0] : '0; p3_last = (q3.size() == 1);
    psum_in = qp.size() > 0 ? qp[0] : '0;
  end
  logic p1_ready_s, p2_ready_s, p3_ready_s, pin_ready_s;
  always @(posedge clk) begin
    p1_ready_s = p1_valid && p1_ready; p2_ready_s = p2_valid && p2_ready;
    p3_ready_s = p3_valid && p3_ready; pin_ready_s = psum_in_valid && psum_in_ready;
    if (rst_n && psum_out_valid && psum_out_ready) got.push_back(psum_out);
    if (skip_fire) n_skip++;
    if (mac_fire) n_mac++;
    #1;
    if (p1_ready_s) begin void'(q1.pop_front()); p1_valid <= 0; end
    if (p2_ready_s) begin void'(q2.pop_front()); p2_valid <= 0; end
    if (p3_ready_s) begin void'(q3.pop_front()); p3_valid <= 0; end
    if (pin_ready_s) begin void'(qp.pop_front()); psum_in_valid <= 0; end
    p1_ready_s = 0; p2_ready_s = 0; p3_ready_s = 0; pin_ready_s = 0;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int w[KMAX]; int a[64]; int b[64]; int mk[64]; int expv[$];

  function automatic int rnd_val();
    return int'($urandom_range(0, 200)) - 100;
  endfunction

  // put a row into a stream: compressed (non-zeros) or dense
  task automatic push_row(ref logic [WORD_W-1:0] q[$], input int v[64], input int len, input bit dense);
    int n = 0;
    for (int i = 0; i < len; i++)
      if (dense) q.push_back({16'h0, 16'(v[i])});
      else if (v[i] != 0) begin q.push_back({16'(i), 16'(v[i])}); n++; end
    if (!dense && n == 0) q.push_back('0);   // end marker of an empty row
  endtask

  task automatic run(input op_e op, input int k, input int pad, input int win, input int dens,
                     input int cpos, input bit d1, output int cycles);
    int olen, nnz, j;
    for (int i = 0; i < KMAX; i++) w[i] = (i < k) ? rnd_val() : 0;
    for (int i = 0; i < 64; i++) begin
      a[i] = ($urandom_range(0, 99) < dens) ? rnd_val() : 0;
      b[i] = ($urandom_range(0, 99) < dens) ? rnd_val() : 0;
      mk[i] = ($urandom_range(0, 1) == 1) ? 1 : 0;
    end
    expv.delete(); got.delete();
    nnz = 0; for (int i = 0; i < win; i++) if (a[i] != 0 || d1) nnz++;
    cfg = '0; cfg.op = op; cfg.k = 4'(k); cfg.pad = 4'(pad); cfg.p1_dense = d1;
    cfg.p2_dense = (op != OP_OSRC); cfg.p3_dense = 1'b0;
    if (op == OP_SRC) begin
      olen = win + 2*pad - k + 1;
      for (int o = 0; o < olen; o++) begin
        int s = 0;
        for (int kk = 0; kk < k; kk++) begin j = o + kk - pad; if (j >= 0 && j < win) s += w[kk] * a[j]; end
        expv.push_back(s);
      end
      push_row(q1, a, win, d1);
      for (int i = 0; i < k; i++) q2.push_back({16'h0, 16'(w[i])});
    end else if (op == OP_MSRC) begin
      // a: dO row of length win; output dI of length olen = win - 2*pad + k - 1
      olen = win - 2*pad + k - 1;
      for (int c = 0; c < olen; c++) begin
        int s = 0;
        for (int kk = 0; kk < k; kk++) begin j = c + pad - kk; if (j >= 0 && j < win) s += w[kk] * a[j]; end
        expv.push_back(mk[c] ? s : 0);
      end
      push_row(q1, a, win, d1);
      for (int i = 0; i < k; i++) q2.push_back({16'h0, 16'(w[i])});
      push_row(q3, mk, olen, 1'b0);
    end else begin
      // a: I row (length win); b: dO row of length olen = win + 2*pad - k + 1
      olen = win + 2*pad - k + 1;
      for (int kk = 0; kk < k; kk++) begin
        int s = 0;
        for (int o = 0; o < olen; o++) begin j = o + kk - pad; if (j >= 0 && j < win) s += b[o] * a[j]; end
        expv.push_back(s);
      end
      push_row(q1, a, win, d1);
      push_row(q2, b, olen, 1'b0);
    end
    cfg.out_len = 16'(olen);
    // Psum input: the bottom PE gets none; otherwise a row of offsets
    if (cpos != 0) begin
      int nfwd = (op == OP_OSRC) ? cpos * k : olen;
      for (int i = 0; i < nfwd; i++) begin
        int v = rnd_val() * 7;
        qp.push_back(v);
        if (op == OP_OSRC) expv.push_front(0); // placeholder, fixed below
        else if (op == OP_SRC || mk[i]) expv[i] += v;
      end
      if (op == OP_OSRC) for (int i = 0; i < nfwd; i++) expv[i] = qp[i];
    end
    chain_pos = 2'(cpos);
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    cycles = 1;
    while (!done) begin @(negedge clk); cycles++; end
    repeat (4) @(negedge clk);
    checks++;
    if (got.size() != expv.size()) begin
      failures++; $display("op %0d: %0d outputs, expected %0d", op, got.size(), expv.size());
    end else
      for (int i = 0; i < got.size(); i++) begin
        checks++;
        if (got[i] != expv[i]) begin failures++; $display("op %0d k=%0d pad=%0d pos %0d: got %0d exp %0d", op, k, pad, i, got[i], expv[i]); end
      end
    checks++;
    if (q1.size() || q2.size() || q3.size() || qp.size()) begin failures++; $display("streams not drained"); end
    if (op == OP_SRC) begin
      checks++;
      if (cycles > 2 * (nnz + olen) + k + 12) begin failures++; $display("SRC too slow: %0d cycles, nnz %0d olen %0d", cycles, nnz, olen); end
    end
  endtask

  initial begin
    int cyc, cyc_sparse, cyc_dense;
    start = 0; cfg = '0; chain_pos = 0; n_skip = 0; n_mac = 0;
    p1_valid = 0; p2_valid = 0; p3_valid = 0; psum_in_valid = 0; psum_out_ready = 1;
    p1_ready_s = 0; p2_ready_s = 0; p3_ready_s = 0; pin_ready_s = 0;
    repeat (3) @(negedge clk); rst_n = 1;
    for (int r = 0; r < 60; r++) begin
      int k, pad, win;
      k = (r % 7 == 6) ? KMAX : int'($urandom_range(1, 5));
      pad = int'($urandom_range(0, k - 1));
      win = int'($urandom_range(k + 1, 40));
      run(op_e'(r % 3), k, pad, win, int'($urandom_range(10, 90)), int'($urandom_range(0, 2)), r[3], cyc);
    end
    // sparsity must pay: a 10%-dense row runs faster than a full one
    run(OP_SRC, 3, 1, 60, 10, 0, 1'b0, cyc_sparse);
    run(OP_SRC, 3, 1, 60, 100, 0, 1'b0, cyc_dense);
    checks++;
    if (!(cyc_sparse < cyc_dense)) begin failures++; $display("no sparsity gain %0d vs %0d", cyc_sparse, cyc_dense); end
    checks++;
    if (n_skip == 0) begin failures++; $display("MSRC never skipped"); end
    $display("PE: %0d MACs, %0d MSRC skips, SRC cycles sparse %0d dense %0d", n_mac, n_skip, cyc_sparse, cyc_dense);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
