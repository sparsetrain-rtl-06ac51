// Self-checking test of a PE group: whole 3-row SRC output rows (with and
// without ReLU), MSRC rows with a mask and OSRC row pairs, each checked as
// the compressed words the PPU sends, against a direct evaluation of the
// convolution in the testbench.
module tb_pe_group;
  import st_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic start, relu_en, prune_en, acc_clr, out_valid, out_last, out_ready, busy, done, pruned_fire, relu_fire;
  pe_cfg_t cfg; logic [DATA_W-1:0] tau;
  logic [NPORTS-1:0] s_valid, s_last, s_ready; logic [WORD_W-1:0] s_word [NPORTS];
  logic [WORD_W-1:0] out_word; logic signed [ACC_W-1:0] acc_sum; logic [ACC_W-1:0] acc_abs;
  logic [PES-1:0] mac_fire, skip_fire;

  pe_group dut (.*);

  logic [WORD_W-1:0] q [NPORTS][$];
  logic [WORD_W:0] gotw[$], expw[$];
  logic [NPORTS-1:0] fired;

  always_comb
    for (int i = 0; i < NPORTS; i++) begin
      s_word[i] = q[i].size() > 0 ? q[i][0] : '0;
      s_last[i] = (q[i].size() == 1);
    end
  always @(negedge clk) begin
    for (int i = 0; i < NPORTS; i++)
      if (!(s_valid[i] && !fired[i])) s_valid[i] <= (q[i].size() > 0) && ($urandom_range(0, 3) != 0);
    out_ready <= ($urandom_range(0, 4) != 0);
  end
  always @(posedge clk) begin
    fired = s_valid & s_ready;
    if (rst_n && out_valid && out_ready) gotw.push_back({out_last, out_word});
    #1;
    for (int i = 0; i < NPORTS; i++) if (fired[i]) begin void'(q[i].pop_front()); s_valid[i] <= 1'b0; end
    fired = '0;
  end

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int w [3][KMAX]; int a [3][64]; int b [3][64]; int mk [64];

  function automatic int rv(); return int'($urandom_range(0, 200)) - 100; endfunction

  task automatic put_row(input int ch, input int v[64], input int len);
    int n = 0;
    for (int i = 0; i < len; i++) if (v[i] != 0) begin q[ch].push_back({16'(i), 16'(v[i])}); n++; end
    if (n == 0) q[ch].push_back('0);
  endtask

  function automatic void expect_row(input int v[], input int len);
    for (int i = 0; i < len; i++) begin
      int x = v[i] >>> FRAC;
      if (x > 32767) x = 32767; if (x < -32768) x = -32768;
      if (x != 0 || i == len - 1) expw.push_back({(i == len - 1), 16'(i), 16'(x)});
    end
  endfunction

  task automatic job(input op_e op, input int k, input int pad, input int win, input bit relu);
    int olen, j;
    int res [];
    for (int r = 0; r < 3; r++) begin
      for (int i = 0; i < KMAX; i++) w[r][i] = i < k ? rv() : 0;
      for (int i = 0; i < 64; i++) begin
        a[r][i] = ($urandom_range(0, 2) == 0) ? rv() : 0;
        b[r][i] = ($urandom_range(0, 2) == 0) ? rv() : 0;
      end
    end
    for (int i = 0; i < 64; i++) mk[i] = $urandom_range(0, 1);
    cfg = '0; cfg.op = op; cfg.k = 4'(k); cfg.pad = 4'(pad); cfg.p2_dense = (op != OP_OSRC);
    if (op == OP_SRC) begin
      olen = win + 2*pad - k + 1;
      res = new[olen];
      for (int o = 0; o < olen; o++) begin
        res[o] = 0;
        for (int r = 0; r < 3; r++) for (int kk = 0; kk < k; kk++) begin
          j = o + kk - pad; if (j >= 0 && j < win) res[o] += w[r][kk] * a[r][j];
        end
        if (relu && res[o] < 0) res[o] = 0;
      end
      for (int r = 0; r < 3; r++) begin
        put_row(3*r, a[r], win);
        for (int i = 0; i < k; i++) q[3*r+1].push_back({16'h0, 16'(w[r][i])});
      end
    end else if (op == OP_MSRC) begin
      olen = win - 2*pad + k - 1;
      res = new[olen];
      for (int c = 0; c < olen; c++) begin
        res[c] = 0;
        for (int r = 0; r < 3; r++) for (int kk = 0; kk < k; kk++) begin
          j = c + pad - kk; if (j >= 0 && j < win) res[c] += w[r][kk] * a[r][j];
        end
        if (!mk[c]) res[c] = 0;
      end
      for (int r = 0; r < 3; r++) begin
        put_row(3*r, a[r], win);
        for (int i = 0; i < k; i++) q[3*r+1].push_back({16'h0, 16'(w[r][i])});
        put_row(3*r+2, mk, olen);
      end
    end else begin
      olen = win + 2*pad - k + 1;
      res = new[3*k];
      for (int r = 0; r < 3; r++) for (int kk = 0; kk < k; kk++) begin
        res[r*k+kk] = 0;
        for (int o = 0; o < olen; o++) begin j = o + kk - pad; if (j >= 0 && j < win) res[r*k+kk] += b[r][o] * a[r][j]; end
      end
      for (int r = 0; r < 3; r++) begin put_row(3*r, a[r], win); put_row(3*r+1, b[r], olen); end
    end
    cfg.out_len = 16'(olen);
    relu_en = relu;
    if (relu) foreach (res[i]) if (res[i] < 0) res[i] = 0;
    expw.delete(); gotw.delete();
    expect_row(res, res.size());
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    while (!done) @(negedge clk);
    repeat (5) @(negedge clk);
    checks++;
    if (gotw.size() != expw.size()) begin failures++; $display("op %0d: %0d words, exp %0d", op, gotw.size(), expw.size()); end
    for (int i = 0; i < gotw.size() && i < expw.size(); i++) begin
      checks++;
      if (gotw[i] != expw[i]) begin failures++; $display("op %0d k=%0d word %0d: %h exp %h", op, k, i, gotw[i], expw[i]); end
    end
  endtask

  initial begin
    start = 0; cfg = '0; relu_en = 0; prune_en = 0; tau = 0; acc_clr = 0; s_valid = '0; fired = '0;
    repeat (3) @(negedge clk); rst_n = 1;
    for (int r = 0; r < 24; r++) begin
      int k, pad;
      k = (r % 4 == 3) ? 5 : 3;
      pad = int'($urandom_range(0, k - 1));
      job(op_e'(r % 3), k, pad, int'($urandom_range(k + 2, 40)), r[2]);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
