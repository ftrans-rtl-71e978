// tb_encoder_layer: one encoder layer (D = 16, two heads, DFF = 32) with
// random attention, output-projection and block-circulant FFN weights and
// unit LayerNorm parameters. The layer has no positional term, so it must be
// permutation-equivariant: running a permuted sentence must give exactly the
// permuted outputs (all sums are integer, so the check is bit-exact). Also
// checks that every output word is written once, that each output row is
// normalised (mean ~0, variance ~1), that changing one token changes the
// other tokens' outputs (attention mixes tokens), and the FFT block count.
module tb_encoder_layer;
  import ftrans_pkg::*;
  localparam int D = 16, H = 2, DK = D / H, DFF = 32, L = 5, NBD = D / BLK, NB2 = DFF / BLK;
  localparam int TW = $clog2(L);
  localparam real PI = 3.14159265358979323846;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;
  always #5 clk = ~clk;

  logic start, done, o_we, ev_fft;
  logic [TW:0] n_tok;
  logic [TW-1:0] xa_tok, xb_tok, o_tok;
  logic [$clog2(NBD)-1:0] xa_blk, xb_blk, o_blk;
  blk_t xa_data, xb_data, o_data;
  logic [BLK-1:0] o_mask;
  wload_t wl;

  encoder_layer #(.D(D), .H(H), .DFF(DFF), .L_MAX(L)) dut (.*);

  int X [L][D], got [L][D], seen [L][D], ref0 [L][D];
  int checks = 0, failures = 0, nfft = 0;

  always_comb
    for (int l = 0; l < BLK; l++) begin
      xa_data[l] = word_t'(X[xa_tok][int'(xa_blk) * BLK + l]);
      xb_data[l] = word_t'(X[xb_tok][int'(xb_blk) * BLK + l]);
    end

  always @(posedge clk) if (rst_n) begin
    if (o_we)
      for (int l = 0; l < BLK; l++)
        if (o_mask[l]) begin got[o_tok][int'(o_blk) * BLK + l] = int'(o_data[l]); seen[o_tok][int'(o_blk) * BLK + l]++; end
    if (ev_fft) nfft++;
  end

  task automatic put(input logic [3:0] unit, input logic [3:0] hd, input logic [1:0] mat, input int addr, input logic [31:0] val);
    @(negedge clk);
    wl = '0;
    wl.en = 1'b1; wl.unit = unit; wl.head = hd; wl.mat = mat; wl.addr = 20'(addr); wl.data = val;
  endtask

  task automatic put_bcm(input logic [3:0] unit, input int f, input int g, input int amp);
    for (int i = 0; i < f; i++) for (int j = 0; j < g; j++) begin
      int p [BLK];
      for (int m = 0; m < BLK; m++) p[m] = int'($urandom_range(0, 2 * amp)) - amp;
      for (int k = 0; k < BLK; k++) begin
        real re, im;
        re = 0.0; im = 0.0;
        for (int m = 0; m < BLK; m++) begin
          re += p[m] * $cos(2.0 * PI * k * m / BLK);
          im -= p[m] * $sin(2.0 * PI * k * m / BLK);
        end
        put(unit, 4'd0, 2'd0, (i * g + j) * BLK + k,
            {16'($rtoi(im + (im >= 0 ? 0.5 : -0.5))), 16'($rtoi(re + (re >= 0 ? 0.5 : -0.5)))});
      end
    end
  endtask

  task automatic run(input int n);
    for (int t = 0; t < L; t++) for (int c = 0; c < D; c++) begin seen[t][c] = 0; got[t][c] = 0; end
    nfft = 0;
    @(negedge clk);
    start = 1; n_tok = (TW+1)'(n);
    @(negedge clk) start = 0;
    wait (done);
    @(posedge clk);
    @(negedge clk);
    for (int t = 0; t < L; t++) for (int c = 0; c < D; c++) begin
      checks++;
      if (seen[t][c] != (t < n ? 1 : 0)) begin
        failures++;
        if (failures < 10) $display("FAIL t%0d c%0d written %0d times", t, c, seen[t][c]);
      end
    end
    for (int t = 0; t < n; t++) begin
      real m, v;
      m = 0.0; v = 0.0;
      for (int c = 0; c < D; c++) begin m += got[t][c] / 256.0; v += (got[t][c] / 256.0) ** 2; end
      m = m / D; v = v / D - m * m;
      checks++;
      if (m > 0.05 || m < -0.05 || v < 0.85 || v > 1.1) begin
        failures++; $display("FAIL t%0d row mean %f var %f", t, m, v);
      end
    end
    checks++;
    if (nfft != n * (NBD + NB2)) begin failures++; $display("FAIL fft blocks %0d", nfft); end
  endtask

  initial begin
    int perm [L];
    int diff;
    start = 0; n_tok = '0; wl = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int h = 0; h < H; h++) for (int m = 0; m < 3; m++)
      for (int a = 0; a < D * DK; a++) put(U_MHA1, 4'(h), 2'(m), a, 32'(int'($urandom_range(0, 128)) - 64));
    for (int a = 0; a < D * D; a++) put(U_MHA1, 4'd0, M_FC, a, 32'(int'($urandom_range(0, 96)) - 48));
    put_bcm(U_FFN1, NB2, NBD, 64);
    put_bcm(U_FFN2, NBD, NB2, 32);
    @(negedge clk) wl = '0;

    for (int t = 0; t < L; t++) for (int c = 0; c < D; c++) X[t][c] = int'($urandom_range(0, 512)) - 256;
    run(L);
    ref0 = got;
    // permutation equivariance (bit-exact)
    for (int t = 0; t < L; t++) perm[t] = (t + 2) % L;
    begin
      int Xs [L][D];
      Xs = X;
      for (int t = 0; t < L; t++) X[perm[t]] = Xs[t];
    end
    run(L);
    for (int t = 0; t < L; t++) for (int c = 0; c < D; c++) begin
      checks++;
      if (got[perm[t]][c] != ref0[t][c]) begin
        failures++;
        if (failures < 10) $display("FAIL permuted t%0d c%0d got %0d exp %0d", t, c, got[perm[t]][c], ref0[t][c]);
      end
    end
    // changing one token changes the others' outputs
    ref0 = got;
    for (int c = 0; c < D; c++) X[0][c] = -X[0][c] + 100;
    run(L);
    diff = 0;
    for (int t = 1; t < L; t++) for (int c = 0; c < D; c++) if (got[t][c] != ref0[t][c]) diff++;
    checks++;
    if (diff == 0) begin failures++; $display("FAIL no mixing between tokens"); end
    // shorter sentence
    run(3);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
