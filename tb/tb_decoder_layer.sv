// tb_decoder_layer: one decoder layer (D = 16, two heads, DFF = 32) with
// random weights for both attentions and the block-circulant FFN, reading a
// fixed random encoder output of n_src = 5 tokens. Bit-exact property checks:
//  - causality: changing the last target token leaves every earlier output
//    row unchanged (masked self attention) and changes the last row;
//  - cross attention ignores key order: permuting the encoder tokens leaves
//    all outputs unchanged; changing the encoder output does change them.
// Also checks single writes, normalised rows, the mask pulse count
// n(n-1)/2, one cross-attention pulse per run and the FFT block count.
module tb_decoder_layer;
  import ftrans_pkg::*;
  localparam int D = 16, H = 2, DK = D / H, DFF = 32, L = 5, NBD = D / BLK, NB2 = DFF / BLK;
  localparam int TW = $clog2(L);
  localparam real PI = 3.14159265358979323846;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;
  always #5 clk = ~clk;

  logic start, done, o_we, ev_fft, ev_mask, ev_cross;
  logic [TW:0] n_tok, n_src;
  logic [TW-1:0] enc_tok;
  logic [$clog2(NBD)-1:0] enc_blk;
  blk_t enc_data;
  logic [TW-1:0] xa_tok, xb_tok, o_tok;
  logic [$clog2(NBD)-1:0] xa_blk, xb_blk, o_blk;
  blk_t xa_data, xb_data, o_data;
  logic [BLK-1:0] o_mask;
  wload_t wl;

  decoder_layer #(.D(D), .H(H), .DFF(DFF), .L_MAX(L)) dut (.*);

  int E [L][D], nmask = 0, ncross = 0, X [L][D], got [L][D], seen [L][D], ref0 [L][D];
  int checks = 0, failures = 0, nfft = 0;

  always_comb
    for (int l = 0; l < BLK; l++) begin
      xa_data[l] = word_t'(X[xa_tok][int'(xa_blk) * BLK + l]);
      xb_data[l] = word_t'(X[xb_tok][int'(xb_blk) * BLK + l]);
      enc_data[l] = word_t'(E[enc_tok][int'(enc_blk) * BLK + l]);
    end

  always @(posedge clk) if (rst_n) begin
    if (o_we)
      for (int l = 0; l < BLK; l++)
        if (o_mask[l]) begin got[o_tok][int'(o_blk) * BLK + l] = int'(o_data[l]); seen[o_tok][int'(o_blk) * BLK + l]++; end
    if (ev_fft) nfft++;
    if (ev_mask) nmask++;
    if (ev_cross) ncross++;
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
    nfft = 0; nmask = 0; ncross = 0;
    @(negedge clk);
    start = 1; n_tok = (TW+1)'(n); n_src = (TW+1)'(L);
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
    checks += 3;
    if (nfft != n * (NBD + NB2)) begin failures++; $display("FAIL fft blocks %0d", nfft); end
    if (nmask != n * (n - 1) / 2) begin failures++; $display("FAIL mask pulses %0d", nmask); end
    if (ncross != 1) begin failures++; $display("FAIL cross pulses %0d", ncross); end
  endtask

  initial begin
    int diff;
    start = 0; n_tok = '0; n_src = '0; wl = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int u = 0; u < 2; u++)
      for (int h = 0; h < H; h++) for (int m = 0; m < 3; m++)
        for (int a = 0; a < D * DK; a++) put(u == 0 ? U_MHA1 : U_MHA2, 4'(h), 2'(m), a, 32'(int'($urandom_range(0, 128)) - 64));
    for (int u = 0; u < 2; u++)
      for (int a = 0; a < D * D; a++) put(u == 0 ? U_MHA1 : U_MHA2, 4'd0, M_FC, a, 32'(int'($urandom_range(0, 96)) - 48));
    put_bcm(U_FFN1, NB2, NBD, 64);
    put_bcm(U_FFN2, NBD, NB2, 32);
    @(negedge clk) wl = '0;

    for (int t = 0; t < L; t++) for (int c = 0; c < D; c++) begin
      X[t][c] = int'($urandom_range(0, 512)) - 256;
      E[t][c] = int'($urandom_range(0, 512)) - 256;
    end
    run(L);
    ref0 = got;
    // causality: change the last target token
    for (int c = 0; c < D; c++) X[L-1][c] = -X[L-1][c] + 77;
    run(L);
    diff = 0;
    for (int t = 0; t < L; t++) for (int c = 0; c < D; c++) begin
      if (t < L - 1) begin
        checks++;
        if (got[t][c] != ref0[t][c]) begin
          failures++;
          if (failures < 10) $display("FAIL causality t%0d c%0d", t, c);
        end
      end else if (got[t][c] != ref0[t][c]) diff++;
    end
    checks++;
    if (diff == 0) begin failures++; $display("FAIL last token change had no effect"); end
    // cross attention: permuting the encoder tokens changes nothing
    ref0 = got;
    begin
      int Es [L][D];
      Es = E;
      for (int t = 0; t < L; t++) E[(t + 3) % L] = Es[t];
    end
    run(L);
    for (int t = 0; t < L; t++) for (int c = 0; c < D; c++) begin
      checks++;
      if (got[t][c] != ref0[t][c]) begin
        failures++;
        if (failures < 10) $display("FAIL key order t%0d c%0d", t, c);
      end
    end
    // ... while new encoder content does
    for (int c = 0; c < D; c++) E[1][c] = -E[1][c];
    run(L);
    diff = 0;
    for (int t = 0; t < L; t++) for (int c = 0; c < D; c++) if (got[t][c] != ref0[t][c]) diff++;
    checks++;
    if (diff == 0) begin failures++; $display("FAIL encoder output has no effect"); end
    run(2);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
