// End-to-end test of the accelerator with two PE groups and small banks.
// The testbench plays the host: it writes rows and job descriptors into
// the buffer, programs the controller and reads the results back. It runs
//   1. a Forward (SRC) job with ReLU, one group fed dense rows, the other
//      compressed rows;
//   2. GTA (MSRC) jobs with pruning requested on one layer: after each,
//      the threshold is determined from A and pushed; once the layer's
//      FIFO is full the next job is pruned with the FIFO's mean;
//   3. a GTW (OSRC) job.
// Every result row is rebuilt from the compressed words and compared with
// a direct evaluation; pruned rows are checked value by value against the
// pruning rule, and A and the bias-gradient sum against the testbench's
// own sums. Each mechanism (zero dropping, ReLU, MSRC skipping, OSRC
// window jump, psum chaining, threshold FIFO filling, pruning) must occur.
module tb_sparsetrain_top;
  import st_pkg::*;
  localparam int NG = 2, BD = 512, AW = 9, BW = 1;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic host_reg_wr, host_buf_en, host_buf_we, busy, done_irq;
  logic [3:0] host_reg_addr; logic [31:0] host_reg_wdata, host_reg_rdata, host_buf_wdata, host_buf_rdata;
  logic [BW-1:0] host_buf_bank; logic [AW-1:0] host_buf_addr;

  sparsetrain_top #(.NG(NG), .BANK_DEPTH(BD)) dut (.*);

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---- mechanism counters (observed inside the design) ----
  int n_relu, n_skip, n_prune, n_jump, n_chain, n_zdrop, n_full;
  always @(posedge clk) if (rst_n) begin
    for (int g = 0; g < NG; g++) ;
    n_relu  += int'(dut.g_grp[0].u_grp.relu_fire) + int'(dut.g_grp[1].u_grp.relu_fire);
    n_prune += int'(dut.g_grp[0].u_grp.pruned_fire) + int'(dut.g_grp[1].u_grp.pruned_fire);
    n_skip  += $countones(dut.g_grp[0].u_grp.skip_fire) + $countones(dut.g_grp[1].u_grp.skip_fire);
    n_jump  += int'(dut.g_grp[0].u_grp.g_pe[0].u_pe.o_jump) + int'(dut.g_grp[1].u_grp.g_pe[0].u_pe.o_jump);
    n_chain += int'(dut.g_grp[0].u_grp.pv[1] && dut.g_grp[0].u_grp.pr[1]);
    n_zdrop += int'(dut.g_grp[0].u_grp.g_pe[0].u_pe.u_fc1.in_valid && dut.g_grp[0].u_grp.g_pe[0].u_pe.u_fc1.is_zero
                    && !dut.g_grp[0].u_grp.g_pe[0].u_pe.u_fc1.in_last);
    n_full  += int'(dut.u_ctrl.prune_en);
  end

  // ---- host bus ----
  task automatic bw(input int b, input int a, input logic [31:0] d);
    @(negedge clk); host_buf_en = 1; host_buf_we = 1; host_buf_bank = BW'(b); host_buf_addr = AW'(a); host_buf_wdata = d;
    @(negedge clk); host_buf_en = 0; host_buf_we = 0;
  endtask
  task automatic br(input int b, input int a, output logic [31:0] d);
    @(negedge clk); host_buf_en = 1; host_buf_we = 0; host_buf_bank = BW'(b); host_buf_addr = AW'(a);
    @(negedge clk); host_buf_en = 0; d = host_buf_rdata;
  endtask
  task automatic rw(input int a, input logic [31:0] d);
    @(negedge clk); host_reg_wr = 1; host_reg_addr = 4'(a); host_reg_wdata = d;
    @(negedge clk); host_reg_wr = 0;
  endtask
  task automatic rr(input int a, output logic [31:0] d);
    @(negedge clk); host_reg_addr = 4'(a); #1 d = host_reg_rdata;
  endtask

  // ---- data ----
  localparam int ROWB = 16, ROWS = 48, OUTB = 448;
  int w [NG][3][KMAX]; int a [NG][3][64]; int b [NG][3][64]; int mk [NG][64];
  int ref_q [NG][64]; int olen_g;
  longint ref_abs, ref_sum;

  function automatic int rv(); return int'($urandom_range(0, 200)) - 100; endfunction
  function automatic int quant(int v);
    int x = v >>> FRAC;
    if (x > 32767) x = 32767; if (x < -32768) x = -32768;
    return x;
  endfunction

  // write a row at ROWB + ch*ROWS, return its length in words
  task automatic put_row(input int g, input int ch, input int v[64], input int len, input bit dense, output int n);
    n = 0;
    for (int i = 0; i < len; i++)
      if (dense) begin bw(g, ROWB + ch*ROWS + n, {16'h0, 16'(v[i])}); n++; end
      else if (v[i] != 0) begin bw(g, ROWB + ch*ROWS + n, {16'(i), 16'(v[i])}); n++; end
    if (n == 0) begin bw(g, ROWB + ch*ROWS, '0); n = 1; end
    bw(g, ch, {16'(n), 16'(ROWB + ch*ROWS)});
  endtask
  task automatic put_w(input int g, input int ch, input int r, input int k);
    for (int i = 0; i < k; i++) bw(g, ROWB + ch*ROWS + i, {16'h0, 16'(w[g][r][i])});
    bw(g, ch, {16'(k), 16'(ROWB + ch*ROWS)});
  endtask
  task automatic no_row(input int g, input int ch); bw(g, ch, '0); endtask

  // build one job in every group; ref_q gets the quantised result
  task automatic setup(input op_e op, input int k, input int pad, input int win, input bit relu, input int dens);
    int n, j, s;
    ref_abs = 0; ref_sum = 0;
    for (int g = 0; g < NG; g++) begin
      for (int r = 0; r < 3; r++) begin
        for (int i = 0; i < KMAX; i++) w[g][r][i] = i < k ? rv() : 0;
        for (int i = 0; i < 64; i++) begin
          a[g][r][i] = ($urandom_range(0, 99) < dens) ? rv() : 0;
          b[g][r][i] = ($urandom_range(0, 99) < dens) ? rv() : 0;
        end
      end
      for (int i = 0; i < 64; i++) mk[g][i] = $urandom_range(0, 1);
      if (op == OP_SRC) begin
        olen_g = win + 2*pad - k + 1;
        for (int o = 0; o < olen_g; o++) begin
          s = 0;
          for (int r = 0; r < 3; r++) for (int kk = 0; kk < k; kk++) begin j = o + kk - pad; if (j >= 0 && j < win) s += w[g][r][kk] * a[g][r][j]; end
          if (relu && s < 0) s = 0;
          ref_q[g][o] = quant(s);
        end
        for (int r = 0; r < 3; r++) begin put_row(g, 3*r, a[g][r], win, g == 0, n); put_w(g, 3*r+1, r, k); no_row(g, 3*r+2); end
      end else if (op == OP_MSRC) begin
        olen_g = win - 2*pad + k - 1;
        for (int c = 0; c < olen_g; c++) begin
          s = 0;
          for (int r = 0; r < 3; r++) for (int kk = 0; kk < k; kk++) begin j = c + pad - kk; if (j >= 0 && j < win) s += w[g][r][kk] * a[g][r][j]; end
          if (!mk[g][c]) s = 0;
          ref_q[g][c] = quant(s);
        end
        for (int r = 0; r < 3; r++) begin put_row(g, 3*r, a[g][r], win, 1'b0, n); put_w(g, 3*r+1, r, k); put_row(g, 3*r+2, mk[g], olen_g, 1'b0, n); end
      end else begin
        int ol;
        ol = win + 2*pad - k + 1;
        olen_g = 3 * k;
        for (int r = 0; r < 3; r++) for (int kk = 0; kk < k; kk++) begin
          s = 0;
          for (int o = 0; o < ol; o++) begin j = o + kk - pad; if (j >= 0 && j < win) s += b[g][r][o] * a[g][r][j]; end
          ref_q[g][r*k+kk] = quant(s);
        end
        for (int r = 0; r < 3; r++) begin put_row(g, 3*r, a[g][r], win, 1'b0, n); put_row(g, 3*r+1, b[g][r], ol, 1'b0, n); no_row(g, 3*r+2); end
      end
      for (int i = 0; i < olen_g; i++) begin ref_abs += (ref_q[g][i] < 0 ? -ref_q[g][i] : ref_q[g][i]); ref_sum += ref_q[g][i]; end
      bw(g, 9, 32'(OUTB));
    end
  endtask

  task automatic run_job(input op_e op, input int k, input int pad, input int olen, input bit relu, input bit prune, input bit d1);
    logic [31:0] st;
    rw(1, {1'b0, prune, relu, 1'b0, op != OP_OSRC, d1, 4'(pad), 4'(k), 2'(op), 16'(olen)});
    rw(2, {16'(NG), 16'd0});
    rw(0, 32'd1);
    @(negedge clk);
    while (busy) @(negedge clk);
  endtask

  // compare the groups' result rows; pruned: check the pruning rule
  task automatic check_out(input string name, input bit pruned, input int tau);
    logic [31:0] d, dw;
    int n, dense [64], v, m;
    for (int g = 0; g < NG; g++) begin
      br(g, 9, dw);
      n = int'(dw[31:16]);
      for (int i = 0; i < 64; i++) dense[i] = 0;
      checks++;
      if (n < 1 || n > olen_g) begin failures++; $display("%s g%0d: %0d words", name, g, n); n = 0; end
      for (int i = 0; i < n; i++) begin
        br(g, OUTB + i, d);
        if (int'(d[31:16]) < 64) dense[d[31:16]] = int'(signed'(d[15:0]));
        if (i == n - 1) begin checks++; if (int'(d[31:16]) != olen_g - 1) begin failures++; $display("%s g%0d: row ends at %0d", name, g, d[31:16]); end end
      end
      for (int i = 0; i < olen_g; i++) begin
        v = ref_q[g][i]; m = v < 0 ? -v : v;
        checks++;
        if (!pruned || m >= tau) begin
          if (dense[i] != v) begin failures++; $display("%s g%0d pos %0d: %0d exp %0d", name, g, i, dense[i], v); end
        end else if (!(dense[i] == 0 || (v > 0 && dense[i] == tau) || (v < 0 && dense[i] == -tau))) begin
          failures++; $display("%s g%0d pos %0d: pruned %0d to %0d, tau %0d", name, g, i, v, dense[i], tau);
        end
      end
    end
  endtask

  initial begin
    logic [31:0] r1, r2, r4, r5;
    longint a_hw, coef;
    int tau_now, prev_prune;
    host_reg_wr = 0; host_reg_addr = 0; host_reg_wdata = 0;
    host_buf_en = 0; host_buf_we = 0; host_buf_bank = 0; host_buf_addr = 0; host_buf_wdata = 0;
    n_relu = 0; n_skip = 0; n_prune = 0; n_jump = 0; n_chain = 0; n_zdrop = 0; n_full = 0;
    repeat (3) @(negedge clk); rst_n = 1;

    // 1. Forward, 3x3 kernel, padding 1, ReLU
    setup(OP_SRC, 3, 1, 30, 1'b1, 40);
    // group 0 reads its activations dense, group 1 compressed: Port-1 dense
    // flag is shared, so group 1's rows are re-written dense as well
    for (int r = 0; r < 3; r++) begin int n; put_row(1, 3*r, a[1][r], 30, 1'b1, n); end
    run_job(OP_SRC, 3, 1, olen_g, 1'b1, 1'b0, 1'b1);
    check_out("SRC", 1'b0, 0);
    rr(3, r1); checks++;
    if (longint'(signed'(r1)) != ref_sum) begin failures++; $display("bias sum %0d exp %0d", signed'(r1), ref_sum); end

    // 2. GTA on layer 5 with pruning requested
    rw(0, 32'd4);                              // clear A
    for (int batch = 0; batch < 6; batch++) begin
      rw(3, {24'd0, 8'd5});
      setup(OP_MSRC, 3, 1, 34, 1'b0, 30);
      rr(4, r4); tau_now = int'(r4[15:0]);
      rr(0, r5);
      prev_prune = n_prune;
      run_job(OP_MSRC, 3, 1, olen_g, 1'b0, 1'b1, 1'b0);
      check_out("MSRC", r5[1], tau_now);
      checks++;
      if (!r5[1] && n_prune != prev_prune) begin failures++; $display("pruned before the FIFO was full"); end
      rr(1, r1); rr(2, r2); a_hw = {r2[7:0], r1};
      checks++;
      if (a_hw != ref_abs) begin failures++; $display("A %0d exp %0d", a_hw, ref_abs); end
      // threshold for about 60% target sparsity of this batch: coef = c/n
      coef = (longint'(1) << 24) * 84 / 100 / longint'(NG * olen_g);
      rw(3, {24'(coef), 8'd5});
      rr(4, r4); checks++;
      if (longint'(r4[31:16]) != ((a_hw * coef) >> 24)) begin failures++; $display("tau_det %0d", r4[31:16]); end
      rw(0, 32'd2);                            // end of batch: push, clear A
    end

    // 3. GTW
    setup(OP_OSRC, 3, 1, 36, 1'b0, 30);
    run_job(OP_OSRC, 3, 1, 36, 1'b0, 1'b0, 1'b0);
    check_out("OSRC", 1'b0, 0);

    $display("mechanisms: relu %0d skip %0d prune %0d jump %0d chain %0d zero-drop %0d fifo-full %0d",
             n_relu, n_skip, n_prune, n_jump, n_chain, n_zdrop, n_full);
    checks++; if (n_relu == 0)  begin failures++; $display("ReLU never applied"); end
    checks++; if (n_skip == 0)  begin failures++; $display("MSRC never skipped"); end
    checks++; if (n_prune == 0) begin failures++; $display("never pruned"); end
    checks++; if (n_jump == 0)  begin failures++; $display("OSRC window never jumped"); end
    checks++; if (n_chain == 0) begin failures++; $display("psum chain never used"); end
    checks++; if (n_zdrop == 0) begin failures++; $display("no zero dropped"); end
    checks++; if (n_full == 0)  begin failures++; $display("threshold FIFO never full"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
