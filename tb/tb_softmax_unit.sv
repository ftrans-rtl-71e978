// tb_softmax_unit: rows of random length, scores and mask bits go through
// the unit; every probability is compared with exp(x_i - max) / sum over the
// kept entries (tolerance 8 LSB of Q8.8, i.e. about 3%), masked entries
// must be exactly 0, and the first probability must come n + 2 clocks after
// the last score of a row of n.
module tb_softmax_unit;
  import ftrans_pkg::*;
  localparam int L_MAX = 16;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid, in_keep, in_last, in_ready, out_valid, out_last;
  word_t in_x, out_p;
  logic [$clog2(L_MAX)-1:0] out_idx;

  softmax_unit #(.L_MAX(L_MAX)) dut (.*);

  int checks = 0, failures = 0, cyc = 0;
  always @(posedge clk) cyc++;

  initial begin
    in_valid = 0; in_keep = 0; in_last = 0; in_x = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int r = 0; r < 40; r++) begin
      int n, xs [L_MAX], kp [L_MAX], t_last, got, first_out;
      real mx, sum;
      n = (r == 0) ? 1 : int'($urandom_range(1, L_MAX));
      mx = -1.0e9; sum = 0.0;
      for (int i = 0; i < n; i++) begin
        xs[i] = int'($urandom_range(0, 2048)) - 1024;
        kp[i] = (r % 3 == 0) ? 1 : int'($urandom_range(0, 3) != 0);
        if (r == 5) kp[i] = 0;                         // fully masked row
        if (kp[i] && xs[i] / 256.0 > mx) mx = xs[i] / 256.0;
      end
      for (int i = 0; i < n; i++) if (kp[i]) sum += $exp(xs[i] / 256.0 - mx);
      // wait for ready, then stream the row
      while (!in_ready) @(negedge clk);
      for (int i = 0; i < n; i++) begin
        @(negedge clk);
        in_valid = 1; in_x = word_t'(xs[i]); in_keep = kp[i][0]; in_last = (i == n - 1);
      end
      @(posedge clk) t_last = cyc;
      @(negedge clk) in_valid = 0; in_last = 0;
      got = 0; first_out = -1;
      while (got < n) begin
        @(posedge clk);
        if (out_valid) begin
          real e; int ei;
          if (first_out < 0) first_out = cyc;
          e  = kp[out_idx] ? 256.0 * $exp(xs[out_idx] / 256.0 - mx) / sum : 0.0;
          ei = $rtoi(e);
          checks++;
          if (!kp[out_idx] ? (out_p != 0) : ((out_p - e > 8.0) || (e - out_p > 8.0))) begin
            failures++;
            if (failures < 10) $display("FAIL row %0d idx %0d got %0d exp %f", r, out_idx, out_p, e);
          end
          checks++;
          if (int'(out_idx) != got || out_last != (got == n - 1)) begin failures++; $display("FAIL order row %0d", r); end
          got++;
        end
        if (cyc - t_last > 4 * L_MAX + 10) begin failures++; $display("FAIL row %0d stuck", r); break; end
      end
      checks++;
      if (first_out - t_last != n + 2) begin failures++; $display("FAIL latency %0d for n=%0d", first_out - t_last, n); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
