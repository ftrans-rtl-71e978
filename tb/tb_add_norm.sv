// tb_add_norm: random sub-layer outputs and residuals (D = 20, so the last
// block is partly padding) and random gamma/beta go through the unit. The
// reference recomputes residual sum, mean, variance, integer square root and
// the normalised output with the same integer rounding, so every word must
// match exactly; a second, real-valued check confirms each normalised row
// (before gamma/beta) has mean ~0 and standard deviation ~1.
module tb_add_norm;
  import ftrans_pkg::*;
  localparam int D = 20, L = 4, NBD = (D + BLK - 1) / BLK, TW = $clog2(L);
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;
  always #5 clk = ~clk;

  logic start, done, wl_en, o_we;
  logic [TW:0] n_tok;
  logic [TW-1:0] a_tok, r_tok, o_tok;
  logic [$clog2(NBD)-1:0] a_blk, r_blk;
  blk_t a_data, r_data;
  logic [19:0] wl_addr;
  logic [31:0] wl_data;
  logic [$clog2(D)-1:0] o_col;
  word_t o_data;

  add_norm #(.D(D), .L_MAX(L)) dut (.*);

  int A [L][NBD*BLK], R [L][NBD*BLK], G [D], B [D], got [L][D], seen [L][D];
  int checks = 0, failures = 0;

  always_comb
    for (int l = 0; l < BLK; l++) begin
      a_data[l] = (int'(a_blk) * BLK + l < D) ? word_t'(A[a_tok][int'(a_blk) * BLK + l]) : '0;
      r_data[l] = (int'(r_blk) * BLK + l < D) ? word_t'(R[r_tok][int'(r_blk) * BLK + l]) : '0;
    end

  always @(posedge clk) if (rst_n && o_we) begin got[o_tok][o_col] = int'(o_data); seen[o_tok][o_col]++; end

  function automatic int sat(longint v);
    return (v > 32767) ? 32767 : (v < -32768) ? -32768 : int'(v);
  endfunction

  initial begin
    start = 0; n_tok = '0; wl_en = 0; wl_addr = '0; wl_data = '0;
    for (int t = 0; t < L; t++) for (int c = 0; c < NBD*BLK; c++) begin
      A[t][c] = int'($urandom_range(0, 1600)) - 800 + ((c % 3 == 0) ? 400 : 0);
      R[t][c] = int'($urandom_range(0, 1600)) - 800;
      if (t == 1) A[t][c] = 32000;   // saturating residual sum on one token
    end
    for (int c = 0; c < D; c++) begin
      G[c] = (c < D / 2) ? int'($urandom_range(128, 384)) : 256;
      B[c] = (c < D / 2) ? int'($urandom_range(0, 128)) - 64 : 0;
    end
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int c = 0; c < D / 2; c++) begin
      @(negedge clk);
      wl_en = 1; wl_addr = 20'(c); wl_data = {16'(B[c]), 16'(G[c])};
    end
    @(negedge clk) wl_en = 0;
    start = 1; n_tok = (TW+1)'(L);
    @(negedge clk) start = 0;
    wait (done);
    @(posedge clk);
    @(negedge clk);
    for (int t = 0; t < L; t++) begin
      longint sum, sq, var_, mean;
      int v [D], sd;
      real rm, rv;
      sum = 0; sq = 0;
      for (int c = 0; c < D; c++) begin v[c] = sat(A[t][c] + R[t][c]); sum += v[c]; end
      mean = sum / D;
      for (int c = 0; c < D; c++) sq += (v[c] - mean) * (v[c] - mean);
      var_ = sq / D;
      sd = 0;
      for (int b = 15; b >= 0; b--) if (longint'(sd | (1 << b)) * (sd | (1 << b)) <= var_) sd |= 1 << b;
      if (sd == 0) sd = 1;
      rm = 0.0; rv = 0.0;
      for (int c = 0; c < D; c++) begin
        longint y, z;
        y = ((v[c] - mean) * 256) / sd;
        z = ((y * G[c]) >>> 8) + B[c];
        checks++;
        if (got[t][c] != sat(z) || seen[t][c] != 1) begin
          failures++;
          if (failures < 10) $display("FAIL t%0d c%0d got %0d exp %0d", t, c, got[t][c], sat(z));
        end
        rm += y / 256.0; rv += (y / 256.0) * (y / 256.0);
      end
      rm = rm / D; rv = rv / D;
      checks++;
      if (t != 1 && (rm > 0.05 || rm < -0.05 || rv > 1.1 || rv < 0.9)) begin
        failures++; $display("FAIL t%0d normalised mean %f var %f", t, rm, rv);
      end
    end
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
