// Self-checking test of the group stream engine with a memory model of its
// bank: random descriptors and rows, random back-pressure on the nine
// streams; every stream must deliver exactly its row with "last" on its
// final word, the output words must land at the output base, and the word
// count must be written back into descriptor word 9.
module tb_group_dma;
  import st_pkg::*;
  localparam int AW = 10;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic start, rd_en, wr_en, in_valid, in_last, in_ready, grp_done, busy, done;
  logic [AW-1:0] desc_ptr, rd_addr, wr_addr, out_count; logic [31:0] rd_data, wr_data, in_word;
  logic [NPORTS-1:0] s_valid, s_last, s_ready; logic [WORD_W-1:0] s_word [NPORTS];

  group_dma #(.AW(AW)) dut (.*);

  logic [31:0] mem [1 << AW];
  always_ff @(posedge clk) begin
    if (rd_en) rd_data <= mem[rd_addr];
    if (wr_en) mem[wr_addr] <= wr_data;
  end

  int exp_len [NPORTS], exp_base [NPORTS], got [NPORTS];
  bit last_ok [NPORTS];
  always @(negedge clk) s_ready <= NPORTS'($urandom);
  always @(posedge clk)
    for (int i = 0; i < NPORTS; i++)
      if (rst_n && s_valid[i] && s_ready[i]) begin
        checks++;
        if (s_word[i] != mem[exp_base[i] + got[i]] || s_last[i] != (got[i] == exp_len[i] - 1)) begin
          failures++; $display("stream %0d word %0d wrong", i, got[i]);
        end
        got[i]++;
      end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int nout, obase;
    start = 0; desc_ptr = 0; in_valid = 0; in_last = 0; in_word = 0; grp_done = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int job = 0; job < 8; job++) begin
      desc_ptr = AW'(job * 4);
      for (int i = 0; i < NPORTS; i++) begin
        exp_len[i] = $urandom_range(0, 20); exp_base[i] = 100 + i * 24; got[i] = 0;
        for (int j = 0; j < exp_len[i]; j++) mem[exp_base[i] + j] = $urandom;
        mem[desc_ptr + i] = {16'(exp_len[i]), 16'(exp_base[i])};
      end
      obase = 400 + job * 40; nout = $urandom_range(1, 30);
      mem[desc_ptr + 9] = {16'h0, 16'(obase)};
      @(negedge clk); start = 1; @(negedge clk); start = 0;
      // PPU side: nout words, then the group reports done
      for (int j = 0; j < nout; j++) begin
        bit fired;
        in_valid = 1; in_word = 32'(job * 1000 + j); in_last = (j == nout - 1);
        do begin @(posedge clk); fired = in_ready; @(negedge clk); end while (!fired);
        in_valid = 0;
      end
      // streams drained before the group says done
      while (1) begin
        bit all;
        all = 1;
        for (int i = 0; i < NPORTS; i++) if (got[i] != exp_len[i]) all = 0;
        if (all) break;
        @(negedge clk);
      end
      grp_done = 1; @(negedge clk); grp_done = 0;
      while (busy) @(negedge clk);
      for (int j = 0; j < nout; j++) begin
        checks++;
        if (mem[obase + j] != 32'(job * 1000 + j)) begin failures++; $display("output %0d wrong", j); end
      end
      checks++;
      if (mem[desc_ptr + 9] != {16'(nout), 16'(obase)} || out_count != AW'(nout)) begin
        failures++; $display("count written back %h", mem[desc_ptr + 9]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
