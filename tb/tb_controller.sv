// Self-checking test of the controller with four model groups that finish
// after random delays: configuration decoding, starts only to the active
// groups, completion only after all of them, A and bias sums collected from
// the accumulators, threshold pushes, and pruning enabled only when it is
// requested and the layer's threshold FIFO is full.
module tb_controller;
  import st_pkg::*;
  localparam int NG = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic host_wr, busy, job_done, relu_en, prune_en, acc_clr; logic [3:0] host_addr;
  logic [31:0] host_wdata, host_rdata; logic [NG-1:0] grp_start, grp_done; logic [15:0] desc_ptr;
  pe_cfg_t pe_cfg; logic [DATA_W-1:0] tau;
  logic signed [ACC_W-1:0] acc_sum [NG]; logic [ACC_W-1:0] acc_abs [NG];

  controller #(.NG(NG)) dut (.*);

  int delay [NG]; bit running [NG]; int starts [NG];
  always @(posedge clk) begin
    grp_done <= '0;
    for (int g = 0; g < NG; g++) begin
      if (grp_start[g]) begin running[g] = 1; delay[g] = $urandom_range(1, 30); starts[g]++; end
      else if (running[g]) begin
        if (delay[g] == 0) begin running[g] = 0; grp_done[g] <= 1'b1; end
        else delay[g]--;
      end
    end
  end

  task automatic rw(input int a, input logic [31:0] d);
    @(negedge clk); host_wr = 1; host_addr = 4'(a); host_wdata = d; @(negedge clk); host_wr = 0;
  endtask
  task automatic rr(input int a, output logic [31:0] d);
    @(negedge clk); host_addr = 4'(a); #1 d = host_rdata;
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] d, d2;
    longint a_exp, s_exp, tau_exp, q [$];
    int nact;
    host_wr = 0; host_addr = 0; host_wdata = 0;
    for (int g = 0; g < NG; g++) begin acc_sum[g] = 0; acc_abs[g] = 0; running[g] = 0; starts[g] = 0; end
    repeat (2) @(negedge clk); rst_n = 1;
    // configuration decode
    rw(1, {1'b0, 1'b1, 1'b1, 1'b1, 1'b0, 1'b1, 4'd2, 4'd5, 2'd1, 16'd77});
    checks++;
    if (pe_cfg.out_len != 77 || pe_cfg.op != OP_MSRC || pe_cfg.k != 5 || pe_cfg.pad != 2 ||
        !pe_cfg.p1_dense || pe_cfg.p2_dense || !pe_cfg.p3_dense || !relu_en)
      begin failures++; $display("cfg decode"); end
    checks++;
    if (prune_en) begin failures++; $display("pruning before FIFO full"); end
    rw(0, 32'd4);
    a_exp = 0;
    for (int job = 0; job < 6; job++) begin
      nact = $urandom_range(1, NG);
      rw(2, {16'(nact), 16'(job * 10)});
      rw(3, {24'(1 << 20), 8'd7});          // coef 1/16, layer 7
      for (int g = 0; g < NG; g++) starts[g] = 0;
      rw(0, 32'd1);
      // accumulators present while the groups run
      s_exp = 0;
      for (int g = 0; g < NG; g++) begin
        acc_sum[g] = ACC_W'($urandom_range(0, 2000)) - 1000; acc_abs[g] = ACC_W'($urandom_range(0, 5000));
        if (g < nact) begin a_exp += acc_abs[g]; s_exp += acc_sum[g]; end
      end
      checks++;
      if (!busy || desc_ptr != 16'(job * 10)) begin failures++; $display("not busy / desc"); end
      while (busy) @(negedge clk);
      for (int g = 0; g < NG; g++) begin
        checks++;
        if (starts[g] != (g < nact ? 1 : 0) || running[g]) begin failures++; $display("group %0d start %0d", g, starts[g]); end
      end
      rr(1, d); rr(2, d2); checks++;
      if ({d2[7:0], d} != 40'(a_exp)) begin failures++; $display("A %0d exp %0d", {d2[7:0], d}, a_exp); end
      rr(3, d); checks++;
      if (longint'(signed'(d)) != s_exp) begin failures++; $display("bias %0d exp %0d", signed'(d), s_exp); end
      // end of batch: tau = A/16 pushed into layer 7's FIFO
      tau_exp = a_exp >> 4; if (tau_exp > 65535) tau_exp = 65535;
      rr(4, d); checks++;
      if (d[31:16] != 16'(tau_exp)) begin failures++; $display("tau_det %0d exp %0d", d[31:16], tau_exp); end
      rw(0, 32'd2);
      q.push_front(tau_exp); if (q.size() > 4) void'(q.pop_back());
      a_exp = 0;
      rr(4, d); rr(0, d2);
      begin
        longint s; s = 0; foreach (q[i]) s += q[i];
        checks++;
        if (d[15:0] != 16'(s / 4) || d2[1] != (q.size() == 4) || tau != d[15:0]) begin failures++; $display("pred %0d full %b", d[15:0], d2[1]); end
        checks++;
        if (prune_en != (q.size() == 4)) begin failures++; $display("prune_en %b", prune_en); end
      end
    end
    // another layer has an empty FIFO: no pruning there
    rw(3, {24'd0, 8'd8}); checks++;
    if (prune_en) begin failures++; $display("pruning on an empty layer"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
