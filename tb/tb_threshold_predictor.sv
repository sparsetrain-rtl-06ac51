// Self-checking test of threshold determination and prediction: random
// pushes into several layers' FIFOs, compared with a software model of the
// per-layer FIFO, its mean, the full flag and tau = A*coef/2^24.
module tb_threshold_predictor;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic [7:0] layer; logic push, full; logic [39:0] a_sum; logic [23:0] coef; logic [15:0] tau_det, tau_pred;

  threshold_predictor dut (.*);

  int q [4][$];
  longint det;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    push = 0; layer = 0; a_sum = 0; coef = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int i = 0; i < 400; i++) begin
      int l;
      l = int'($urandom_range(0, 3));
      layer = 8'(l * 37);
      a_sum = 40'($urandom_range(0, 1 << 30)) * 40'($urandom_range(1, 64));
      coef = 24'($urandom_range(0, 1 << 24));
      push = ($urandom_range(0, 2) == 0);
      #1;
      det = (longint'(a_sum) * longint'(coef)) >>> 24;
      if (det > 65535) det = 65535;
      checks++;
      if (longint'(tau_det) != det) begin failures++; $display("det %0d exp %0d", tau_det, det); end
      checks++;
      if (full != (q[l].size() == 4)) begin failures++; $display("full flag wrong layer %0d", l); end
      begin
        int s;
        s = 0; for (int j = 0; j < q[l].size(); j++) s += q[l][j];
        checks++;
        if (int'(tau_pred) != s / 4) begin failures++; $display("pred %0d exp %0d", tau_pred, s / 4); end
      end
      @(negedge clk);
      if (push) begin q[l].push_front(int'(det)); if (q[l].size() > 4) void'(q[l].pop_back()); end
      push = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
