// Self-checking test of the port format converter: dense and compressed
// rows with zeros, random back-pressure; the expected (value, index) list
// is computed from the generated row.
module tb_format_converter;
  import st_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic dense, in_valid, in_last, in_ready, out_valid, out_nz, out_last, out_ready;
  logic [WORD_W-1:0] in_word;
  logic signed [DATA_W-1:0] out_val;
  logic [IDX_W-1:0] out_idx;

  format_converter dut (.*);

  logic [WORD_W-1:0] row [32];
  int n, exp_val [$], exp_idx [$], got;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // consumer with random stalls; compares every element with the queue
  always @(negedge clk) out_ready <= ($urandom_range(0, 3) != 0);
  always_ff @(posedge clk) begin
    if (out_valid && out_ready) begin
      if (out_nz) begin
        checks++;
        if (exp_val.size() == 0 || out_val != exp_val[0] || out_idx != exp_idx[0]) begin
          failures++;
          $display("mismatch val=%0d idx=%0d", out_val, out_idx);
        end
        if (exp_val.size() != 0) begin void'(exp_val.pop_front()); void'(exp_idx.pop_front()); end
      end
      if (out_last) got++;
    end
  end

  task automatic send_row(input bit dn, input int len);
    dense = dn;
    for (int i = 0; i < len; i++) begin
      logic signed [15:0] v = ($urandom_range(0, 2) == 0) ? 16'(int'($urandom_range(1, 500)) - 250) : 16'sd0;
      int col = dn ? i : i * 3 + 1;
      if (v == 0 && !dn) v = 16'sd7;  // compressed rows hold non-zeros
      if (!dn && i == len - 1 && $urandom_range(0, 1) == 1) v = 0; // end marker
      row[i] = dn ? {16'h0, v} : {16'(col), v};
      if (v != 0) begin exp_val.push_back(v); exp_idx.push_back(col); end
    end
    for (int i = 0; i < len; i++) begin
      bit fired;
      in_valid = 1; in_word = row[i]; in_last = (i == len - 1);
      do begin @(posedge clk); fired = in_ready; @(negedge clk); end while (!fired);
    end
    in_valid = 0;
  endtask

  initial begin
    in_valid = 0; in_last = 0; in_word = 0; dense = 0; got = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int r = 0; r < 40; r++) send_row(r[0], $urandom_range(1, 30));
    repeat (20) @(posedge clk);
    checks++;
    if (got != 40 || exp_val.size() != 0) begin
      failures++; $display("rows ended %0d, leftover %0d", got, exp_val.size());
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
