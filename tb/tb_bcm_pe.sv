// tb_bcm_pe: a random block-circulant layer (F x G blocks of size 8) is
// loaded as FFT(p_ij), computed here with real arithmetic and rounded to
// Q8.8; random input vectors for several tokens stream through the PE back
// to back. Each output block is compared with the direct circular
// convolution sum_j p_ij (*) x_j (no FFT), tolerance 6 LSB, and the result
// must leave 2*log2(8)+1 = 7 clocks after the last block of its row.
module tb_bcm_pe;
  import ftrans_pkg::*;
  localparam int N = 8, F = 3, G = 4, T = 3;
  localparam real PI = 3.14159265358979323846;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid, in_first, in_last, wl_en, out_valid;
  logic [$clog2(F+1)-1:0] in_row;
  logic [$clog2(G+1)-1:0] in_col;
  logic [15:0] in_tag, out_tag;
  word_t in_x [N], out_y [N];
  logic [19:0] wl_addr;
  logic [31:0] wl_data;

  bcm_pe #(.N(N), .F(F), .G(G)) dut (.*);

  int p [F][G][N];
  int x [T][G][N];
  int checks = 0, failures = 0, cyc = 0, nout = 0;
  int t_last [int];
  always @(posedge clk) cyc++;

  always @(posedge clk) if (rst_n && out_valid) begin
    int t, i;
    t = int'(out_tag) / 16; i = int'(out_tag) % 16;
    nout++;
    for (int k = 0; k < N; k++) begin
      longint acc; real e;
      acc = 0;
      for (int j = 0; j < G; j++)
        for (int m = 0; m < N; m++) acc += longint'(p[i][j][m]) * x[t][j][(k - m + N) % N];
      e = acc / 256.0;
      checks++;
      if ((out_y[k] - e > 6.0) || (e - out_y[k] > 6.0)) begin
        failures++;
        if (failures < 10) $display("FAIL t%0d i%0d k%0d got %0d exp %f", t, i, k, out_y[k], e);
      end
    end
    checks++;
    if (cyc - t_last[int'(out_tag)] != 7) begin failures++; $display("FAIL latency %0d", cyc - t_last[int'(out_tag)]); end
  end

  initial begin
    in_valid = 0; in_first = 0; in_last = 0; wl_en = 0; in_row = '0; in_col = '0; in_tag = '0;
    wl_addr = '0; wl_data = '0;
    for (int k = 0; k < N; k++) in_x[k] = '0;
    for (int i = 0; i < F; i++) for (int j = 0; j < G; j++) for (int m = 0; m < N; m++)
      p[i][j][m] = int'($urandom_range(0, 256)) - 128;
    for (int t = 0; t < T; t++) for (int j = 0; j < G; j++) for (int m = 0; m < N; m++)
      x[t][j][m] = int'($urandom_range(0, 1024)) - 512;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // load FFT(p_ij)
    for (int i = 0; i < F; i++) for (int j = 0; j < G; j++) for (int k = 0; k < N; k++) begin
      real re, im;
      re = 0.0; im = 0.0;
      for (int m = 0; m < N; m++) begin
        re += p[i][j][m] * $cos(2.0 * PI * k * m / N);
        im -= p[i][j][m] * $sin(2.0 * PI * k * m / N);
      end
      @(negedge clk);
      wl_en = 1; wl_addr = 20'((i * G + j) * N + k);
      wl_data = {16'($rtoi(im + (im >= 0 ? 0.5 : -0.5))), 16'($rtoi(re + (re >= 0 ? 0.5 : -0.5)))};
    end
    @(negedge clk) wl_en = 0;
    // stream the tokens
    for (int t = 0; t < T; t++) for (int i = 0; i < F; i++) for (int j = 0; j < G; j++) begin
      @(negedge clk);
      in_valid = 1; in_first = (j == 0); in_last = (j == G - 1);
      in_row = ($clog2(F+1))'(i); in_col = ($clog2(G+1))'(j); in_tag = 16'(t * 16 + i);
      for (int k = 0; k < N; k++) in_x[k] = word_t'(x[t][j][k]);
      if (j == G - 1) t_last[t * 16 + i] = cyc + 1;
    end
    @(negedge clk) in_valid = 0;
    repeat (20) @(posedge clk);
    checks++;
    if (nout != T * F) begin failures++; $display("FAIL %0d outputs", nout); end
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
