// Self-checking test of the global buffer: host writes and reads to random
// banks and addresses while idle, then group-side writes and reads, all
// against a software copy of the memory.
module tb_global_buffer;
  localparam int NG = 4, BD = 100, AW = 7, BW = 2;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic host_sel, host_en, host_we; logic [BW-1:0] host_bank; logic [AW-1:0] host_addr;
  logic [31:0] host_wdata, host_rdata;
  logic rd_en [NG], wr_en [NG]; logic [AW-1:0] rd_addr [NG], wr_addr [NG]; logic [31:0] rd_data [NG], wr_data [NG];

  global_buffer #(.NG(NG), .BANK_DEPTH(BD)) dut (.*);

  logic [31:0] model [NG][BD];

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    host_sel = 1; host_en = 0; host_we = 0; host_bank = 0; host_addr = 0; host_wdata = 0;
    for (int g = 0; g < NG; g++) begin rd_en[g] = 0; wr_en[g] = 0; rd_addr[g] = 0; wr_addr[g] = 0; wr_data[g] = 0; end
    repeat (2) @(negedge clk); rst_n = 1;
    for (int g = 0; g < NG; g++) for (int i = 0; i < BD; i++) begin
      @(negedge clk); host_en = 1; host_we = 1; host_bank = BW'(g); host_addr = AW'(i);
      host_wdata = $urandom; model[g][i] = host_wdata;
    end
    @(negedge clk); host_en = 0;
    for (int n = 0; n < 300; n++) begin
      int g, i;
      g = $urandom_range(0, NG - 1); i = $urandom_range(0, BD - 1);
      @(negedge clk); host_en = 1; host_we = 0; host_bank = BW'(g); host_addr = AW'(i);
      @(negedge clk); host_en = 0;
      checks++;
      if (host_rdata != model[g][i]) begin failures++; $display("host read %0d/%0d", g, i); end
    end
    // group side: every bank written and read in the same cycles
    host_sel = 0;
    for (int n = 0; n < 200; n++) begin
      int ra [NG];
      @(negedge clk);
      for (int g = 0; g < NG; g++) begin
        wr_en[g] = 1; wr_addr[g] = AW'($urandom_range(0, BD - 1)); wr_data[g] = $urandom;
        rd_en[g] = 1; ra[g] = $urandom_range(0, BD - 1); rd_addr[g] = AW'(ra[g]);
      end
      @(negedge clk);
      for (int g = 0; g < NG; g++) begin
        checks++;
        if (rd_data[g] != model[g][ra[g]]) begin failures++; $display("bank %0d read %0d", g, ra[g]); end
        model[g][wr_addr[g]] = wr_data[g];
        wr_en[g] = 0; rd_en[g] = 0;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
