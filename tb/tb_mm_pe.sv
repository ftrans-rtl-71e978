// tb_mm_pe: streams dot products of random length through the PE and
// compares the full sum and the rounded, saturated Q8.8 result with
// integer references; checks the one-clock latency and back-to-back use.
module tb_mm_pe;
  import ftrans_pkg::*;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid, in_first, in_last, out_valid;
  word_t a [BLK], b [BLK], out_q;
  logic signed [39:0] out_acc;

  mm_pe dut (.*);

  int checks = 0, failures = 0;
  longint exp_acc [$];
  int     exp_lat [$];
  int     cyc = 0;

  always @(posedge clk) begin
    cyc++;
    if (out_valid) begin
      longint e; longint r; int t0;
      e  = exp_acc.pop_front();
      t0 = exp_lat.pop_front();
      checks++;
      if (out_acc != 40'(e)) begin failures++; $display("FAIL acc %0d exp %0d", out_acc, e); end
      r = (e + 128) >>> 8;
      if (r > 32767) r = 32767;
      if (r < -32768) r = -32768;
      checks++;
      if (longint'(out_q) != r) begin failures++; $display("FAIL q %0d exp %0d", out_q, r); end
      checks++;
      if (cyc - t0 != 1) begin failures++; $display("FAIL latency %0d", cyc - t0); end
    end
  end

  initial begin
    in_valid = 0; in_first = 0; in_last = 0;
    for (int l = 0; l < BLK; l++) begin a[l] = '0; b[l] = '0; end
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int v = 0; v < 60; v++) begin
      int len; longint s;
      len = (v < 3) ? 1 : int'($urandom_range(1, 6));
      s = 0;
      for (int c = 0; c < len; c++) begin
        @(negedge clk);
        in_valid = 1; in_first = (c == 0); in_last = (c == len - 1);
        for (int l = 0; l < BLK; l++) begin
          // v == 2 saturates: large operands
          a[l] = (v == 2) ? 16'sd30000 : word_t'($urandom_range(0, 4000)) - 16'sd2000;
          b[l] = (v == 2) ? 16'sd30000 : word_t'($urandom_range(0, 4000)) - 16'sd2000;
          s += longint'(a[l]) * longint'(b[l]);
        end
        if (c == len - 1) begin exp_acc.push_back(s); exp_lat.push_back(cyc + 1); end
      end
      // occasional idle clock
      if (v % 5 == 4) begin @(negedge clk); in_valid = 0; end
    end
    @(negedge clk) in_valid = 0;
    repeat (4) @(posedge clk);
    checks++;
    if (exp_acc.size() != 0) begin failures++; $display("FAIL missing results"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
