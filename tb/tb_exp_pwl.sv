// tb_exp_pwl: sweeps x over [0, 9) and compares the piece-wise linear
// exp(-x) with the exact exponential (tolerance 2.6% of full scale), checks
// exactness at the segment breakpoints and zero beyond the table.
module tb_exp_pwl;
  logic [15:0] x, y;
  exp_pwl dut (.x, .y);

  int checks = 0, failures = 0;

  initial begin
    for (int v = 0; v < 9 * 256; v += 7) begin
      real e;
      x = 16'(v);
      #1;
      e = 32768.0 * $exp(-v / 256.0);
      if (v >= 8 * 256) e = 0.0;
      checks++;
      if ((y - e > 850.0) || (e - y > 850.0)) begin
        failures++;
        if (failures < 10) $display("FAIL x=%0d y=%0d exp=%f", v, y, e);
      end
    end
    for (int k = 0; k < 16; k++) begin
      x = 16'(k * 128);
      #1;
      checks++;
      if (int'(y) != $rtoi(32768.0 * $exp(-k / 2.0) + 0.5)) begin
        failures++; $display("FAIL breakpoint %0d y=%0d", k, y);
      end
    end
    // monotonic decrease
    for (int v = 1; v < 8 * 256; v++) begin
      logic [15:0] y0;
      x = 16'(v - 1); #1; y0 = y;
      x = 16'(v);     #1;
      if (y > y0) begin failures++; $display("FAIL not monotonic at %0d", v); end
    end
    checks++;
    x = 16'hffff; #1;
    checks++;
    if (y != 0) begin failures++; $display("FAIL large x"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
