// Full-size run of the accelerator at its default parameters (56 groups,
// 168 PEs, 386 KB of buffer): one Forward layer slice in which every group
// computes one output row of a 3x3 convolution with ReLU from three
// compressed input rows of width 56, i.e. 56 output rows in one job.
// Results are read back and compared with a direct evaluation.
module tb_sparsetrain_full;
  import st_pkg::*;
  localparam int NG = 56, AW = 11, BW = 6, WIN = 56, K = 3, PAD = 1;
  localparam int OLEN = WIN + 2*PAD - K + 1;
  localparam int ROWB = 16, ROWS = 64, OUTB = 800;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic host_reg_wr, host_buf_en, host_buf_we, busy, done_irq;
  logic [3:0] host_reg_addr; logic [31:0] host_reg_wdata, host_reg_rdata, host_buf_wdata, host_buf_rdata;
  logic [BW-1:0] host_buf_bank; logic [AW-1:0] host_buf_addr;

  sparsetrain_top dut (.*);

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

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

  int img [NG + 2][WIN];   // input rows (the feature map), zero-padded rows 0 and NG+1
  int w [K][K];
  int ref_q [NG][OLEN];

  initial begin
    int n, s, j, cyc;
    logic [31:0] d;
    host_reg_wr = 0; host_reg_addr = 0; host_reg_wdata = 0;
    host_buf_en = 0; host_buf_we = 0; host_buf_bank = 0; host_buf_addr = 0; host_buf_wdata = 0;
    for (int r = 0; r < NG + 2; r++) for (int c = 0; c < WIN; c++)
      img[r][c] = (r == 0 || r == NG + 1 || $urandom_range(0, 99) >= 35) ? 0 : int'($urandom_range(1, 120));
    for (int r = 0; r < K; r++) for (int c = 0; c < K; c++) w[r][c] = int'($urandom_range(0, 200)) - 100;
    repeat (3) @(negedge clk); rst_n = 1;
    // group g computes output row g from image rows g..g+2 (padding rows included)
    for (int g = 0; g < NG; g++) begin
      for (int r = 0; r < K; r++) begin
        n = 0;
        for (int c = 0; c < WIN; c++) if (img[g + r][c] != 0) begin
          bw(g, ROWB + (3*r)*ROWS + n, {16'(c), 16'(img[g + r][c])}); n++;
        end
        if (n == 0) begin bw(g, ROWB + (3*r)*ROWS, '0); n = 1; end
        bw(g, 3*r, {16'(n), 16'(ROWB + (3*r)*ROWS)});
        for (int c = 0; c < K; c++) bw(g, ROWB + (3*r+1)*ROWS + c, {16'h0, 16'(w[r][c])});
        bw(g, 3*r + 1, {16'(K), 16'(ROWB + (3*r+1)*ROWS)});
        bw(g, 3*r + 2, '0);
      end
      bw(g, 9, 32'(OUTB));
      for (int o = 0; o < OLEN; o++) begin
        s = 0;
        for (int r = 0; r < K; r++) for (int kk = 0; kk < K; kk++) begin
          j = o + kk - PAD; if (j >= 0 && j < WIN) s += w[r][kk] * img[g + r][j];
        end
        if (s < 0) s = 0;
        s = s >>> FRAC; if (s > 32767) s = 32767;
        ref_q[g][o] = s;
      end
    end
    rw(1, {1'b0, 1'b0, 1'b1, 1'b0, 1'b1, 1'b0, 4'(PAD), 4'(K), 2'(OP_SRC), 16'(OLEN)});
    rw(2, {16'(NG), 16'd0});
    rw(0, 32'd1);
    cyc = 0;
    @(negedge clk);
    while (busy) begin @(negedge clk); cyc++; end
    $display("job of %0d output rows took %0d cycles", NG, cyc);
    for (int g = 0; g < NG; g++) begin
      int dense [OLEN];
      foreach (dense[i]) dense[i] = 0;
      br(g, 9, d);
      n = int'(d[31:16]);
      for (int i = 0; i < n; i++) begin
        br(g, OUTB + i, d);
        if (int'(d[31:16]) < OLEN) dense[d[31:16]] = int'(signed'(d[15:0]));
      end
      for (int o = 0; o < OLEN; o++) begin
        checks++;
        if (dense[o] != ref_q[g][o]) begin failures++; $display("group %0d pos %0d: %0d exp %0d", g, o, dense[o], ref_q[g][o]); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
