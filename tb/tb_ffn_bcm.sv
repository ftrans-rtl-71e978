// tb_ffn_bcm: a two-layer block-circulant feed-forward network (D = 16,
// DFF = 32) with random index vectors; the loaded weights are FFT(p_ij)
// computed here. The reference evaluates W2 * ReLU(W1 * x) with direct
// circular convolutions in real arithmetic; outputs must agree within 12 LSB
// and every output block must be written exactly once. Also checks the
// clock count against n*(DFF/8)*(D/8)*2 plus the PE latencies.
module tb_ffn_bcm;
  import ftrans_pkg::*;
  localparam int D = 16, DFF = 32, L = 4, NB1 = D / BLK, NB2 = DFF / BLK, TW = $clog2(L);
  localparam real PI = 3.14159265358979323846;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;
  always #5 clk = ~clk;

  logic start, done, wl1_en, wl2_en, o_we, ev_fft;
  logic [TW:0] n_tok;
  logic [TW-1:0] x_tok, o_tok;
  logic [$clog2(NB1)-1:0] x_blk, o_blk;
  blk_t x_data, o_data;
  logic [19:0] wl_addr;
  logic [31:0] wl_data;

  ffn_bcm #(.D(D), .DFF(DFF), .L_MAX(L)) dut (.*);

  int X [L][D], P1 [NB2][NB1][BLK], P2 [NB1][NB2][BLK], got [L][D], seen [L][NB1];
  int checks = 0, failures = 0, cyc = 0, nfft = 0;
  always @(posedge clk) cyc++;

  always_comb for (int l = 0; l < BLK; l++) x_data[l] = word_t'(X[x_tok][int'(x_blk) * BLK + l]);
  always @(posedge clk) if (rst_n) begin
    if (o_we) begin
      for (int l = 0; l < BLK; l++) got[o_tok][int'(o_blk) * BLK + l] = int'(o_data[l]);
      seen[o_tok][o_blk]++;
    end
    if (ev_fft) nfft++;
  end

  task automatic load(input bit second, input int i, input int j, input int p [BLK], input int g);
    for (int k = 0; k < BLK; k++) begin
      real re, im;
      re = 0.0; im = 0.0;
      for (int m = 0; m < BLK; m++) begin
        re += p[m] * $cos(2.0 * PI * k * m / BLK);
        im -= p[m] * $sin(2.0 * PI * k * m / BLK);
      end
      @(negedge clk);
      wl1_en = !second; wl2_en = second; wl_addr = 20'((i * g + j) * BLK + k);
      wl_data = {16'($rtoi(im + (im >= 0 ? 0.5 : -0.5))), 16'($rtoi(re + (re >= 0 ? 0.5 : -0.5)))};
    end
  endtask

  initial begin
    int t0;
    start = 0; n_tok = '0; wl1_en = 0; wl2_en = 0; wl_addr = '0; wl_data = '0;
    for (int t = 0; t < L; t++) for (int c = 0; c < D; c++) X[t][c] = int'($urandom_range(0, 1024)) - 512;
    for (int i = 0; i < NB2; i++) for (int j = 0; j < NB1; j++) for (int m = 0; m < BLK; m++) P1[i][j][m] = int'($urandom_range(0, 128)) - 64;
    for (int i = 0; i < NB1; i++) for (int j = 0; j < NB2; j++) for (int m = 0; m < BLK; m++) P2[i][j][m] = int'($urandom_range(0, 64)) - 32;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < NB2; i++) for (int j = 0; j < NB1; j++) load(1'b0, i, j, P1[i][j], NB1);
    for (int i = 0; i < NB1; i++) for (int j = 0; j < NB2; j++) load(1'b1, i, j, P2[i][j], NB2);
    @(negedge clk) begin wl1_en = 0; wl2_en = 0; end
    for (int t = 0; t < L; t++) for (int b = 0; b < NB1; b++) seen[t][b] = 0;
    start = 1; n_tok = (TW+1)'(L);
    t0 = cyc;
    @(negedge clk) start = 0;
    wait (done);
    checks++;
    // each layer: L*NB2*NB1 feed clocks, 7 clocks PE latency, 1 clock handover
    if (cyc - t0 > 2 * (L * NB1 * NB2 + 7 + 2) + 2 || cyc - t0 < 2 * L * NB1 * NB2) begin
      failures++; $display("FAIL cycles %0d", cyc - t0);
    end
    @(negedge clk);
    for (int t = 0; t < L; t++) begin
      real h [DFF];
      for (int i = 0; i < NB2; i++) for (int k = 0; k < BLK; k++) begin
        real a;
        a = 0.0;
        for (int j = 0; j < NB1; j++) for (int m = 0; m < BLK; m++) a += P1[i][j][m] * X[t][j*BLK + (k - m + BLK) % BLK] / 256.0;
        h[i*BLK + k] = (a < 0.0) ? 0.0 : a;
      end
      for (int i = 0; i < NB1; i++) for (int k = 0; k < BLK; k++) begin
        real a;
        a = 0.0;
        for (int j = 0; j < NB2; j++) for (int m = 0; m < BLK; m++) a += P2[i][j][m] * h[j*BLK + (k - m + BLK) % BLK] / 256.0;
        checks++;
        if ((got[t][i*BLK+k] - a > 12.0) || (a - got[t][i*BLK+k] > 12.0) || seen[t][i] != 1) begin
          failures++;
          if (failures < 10) $display("FAIL t%0d c%0d got %0d exp %f", t, i*BLK+k, got[t][i*BLK+k], a);
        end
      end
    end
    checks++;
    if (nfft != L * (NB1 + NB2)) begin failures++; $display("FAIL fft count %0d", nfft); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
