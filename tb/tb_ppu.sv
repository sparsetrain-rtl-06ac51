// Self-checking test of the post-processing unit: rows of random partial
// sums with ReLU on or off and pruning on or off; the expected compressed
// words (ReLU, rescale, saturation, stochastic pruning with a model of the
// random sequence, zero dropping, end marker) and both accumulators are
// computed in the testbench.
module tb_ppu;
  import st_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic start, acc_clr, psum_valid, psum_ready, out_valid, out_last, out_ready, busy, done, pruned_fire, relu_fire;
  ppu_cfg_t cfg; logic [DATA_W-1:0] tau; logic signed [PSUM_W-1:0] psum; logic [WORD_W-1:0] out_word;
  logic signed [ACC_W-1:0] acc_sum; logic [ACC_W-1:0] acc_abs;

  ppu dut (.*);

  logic [31:0] model;
  logic [32:0] expw[$], gotw[$];
  longint esum, eabs;
  int n_pruned, n_relu;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) out_ready <= ($urandom_range(0, 3) != 0);
  always @(posedge clk) begin
    if (rst_n && out_valid && out_ready) gotw.push_back({out_last, out_word});
    if (pruned_fire) n_pruned++;
    if (relu_fire) n_relu++;
  end

  task automatic row(input bit relu, input bit prune, input int len);
    int qv, m;
    cfg.relu_en = relu; cfg.prune_en = prune; cfg.out_len = 16'(len);
    tau = 16'($urandom_range(50, 400));
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    for (int i = 0; i < len; i++) begin
      int p;
      bit fired;
      case ($urandom_range(0, 5))
        0: p = 0;
        1: p = int'($urandom_range(0, 20000000)) - 10000000;  // saturates
        default: p = int'($urandom_range(0, 200000)) - 100000;
      endcase
      // model
      qv = (relu && p < 0) ? 0 : p;
      qv = qv >>> FRAC;
      if (qv > 32767) qv = 32767; if (qv < -32768) qv = -32768;
      esum += qv; eabs += (qv < 0 ? -qv : qv);
      m = qv < 0 ? -qv : qv;
      if (prune && m < int'(tau)) begin
        if (longint'(m) * 65536 > longint'(tau) * longint'(model[15:0])) qv = qv < 0 ? -int'(tau) : int'(tau);
        else qv = 0;
      end
      if (qv != 0 || i == len - 1) expw.push_back({(i == len - 1), 16'(i), 16'(qv)});
      psum_valid = 1; psum = p;
      do begin @(posedge clk); fired = psum_ready; @(negedge clk); end while (!fired);
      model = (model >> 1) ^ (model[0] ? 32'h8020_0003 : 32'h0);
      psum_valid = 0;
      if ($urandom_range(0, 3) == 0) @(negedge clk);
    end
  endtask

  initial begin
    start = 0; acc_clr = 0; psum_valid = 0; psum = 0; cfg = '0; tau = 0;
    model = 32'h1234_5678; esum = 0; eabs = 0; n_pruned = 0; n_relu = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int r = 0; r < 40; r++) begin
      row(r[0], r[1], int'($urandom_range(1, 40)));
      repeat (6) @(negedge clk);
      checks++;
      if (acc_sum != esum || acc_abs != eabs) begin failures++; $display("acc %0d/%0d exp %0d/%0d", acc_sum, acc_abs, esum, eabs); end
      if (r % 10 == 9) begin acc_clr = 1; @(negedge clk); acc_clr = 0; esum = 0; eabs = 0; end
    end
    checks++;
    if (gotw.size() != expw.size()) begin failures++; $display("%0d words, expected %0d", gotw.size(), expw.size()); end
    for (int i = 0; i < gotw.size() && i < expw.size(); i++) begin
      checks++;
      if (gotw[i] != expw[i]) begin failures++; $display("word %0d: %h exp %h", i, gotw[i], expw[i]); end
    end
    checks++;
    if (n_pruned == 0 || n_relu == 0) begin failures++; $display("pruning or ReLU never happened"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
