// Self-checking test of the stochastic pruner: every output is compared
// with a model of the pruning rule driven by its own copy of the random
// sequence, and the mean of many pruned copies of one small gradient must
// stay close to the gradient (the pruning keeps the expectation).
module tb_stochastic_pruner;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic en, step, pruned; logic [15:0] tau, rnd; logic signed [15:0] g, g_hat;

  stochastic_pruner dut (.*);

  logic [31:0] model;
  int expv, sum, n_pruned;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int ref_prune(int gv, int t, int r, bit e);
    int m = gv < 0 ? -gv : gv;
    if (!e || m >= t) return gv;
    if (longint'(m) * 65536 > longint'(t) * r) return gv < 0 ? -t : t;
    return 0;
  endfunction

  initial begin
    en = 0; step = 0; tau = 0; g = 0; sum = 0; n_pruned = 0;
    model = 32'h1234_5678;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int i = 0; i < 3000; i++) begin
      @(negedge clk);
      en = ($urandom_range(0, 7) != 0);
      tau = 16'($urandom_range(1, 3000));
      g = 16'(int'($urandom_range(0, 8000)) - 4000);
      if (i % 97 == 0) g = -16'sd32768;
      step = ($urandom_range(0, 3) != 0);
      #1;
      expv = ref_prune(int'(g), int'(tau), int'(model[15:0]), en);
      checks++;
      if (int'(g_hat) != expv) begin failures++; $display("g=%0d tau=%0d got %0d exp %0d", g, tau, g_hat, expv); end
      if (pruned) n_pruned++;
      @(posedge clk); #1;
      if (step) model = (model >> 1) ^ (model[0] ? 32'h8020_0003 : 32'h0);
    end
    // expectation: E[g_hat] = g for |g| < tau
    en = 1; tau = 16'd100; g = 16'sd30; step = 1;
    for (int i = 0; i < 4000; i++) begin @(negedge clk); sum += int'(g_hat); end
    checks++;
    if (sum < 4000 * 27 || sum > 4000 * 33) begin failures++; $display("mean %0d/4000 not near 30", sum); end
    checks++;
    if (n_pruned == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
