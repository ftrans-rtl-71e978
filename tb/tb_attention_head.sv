// tb_attention_head: runs one head (D = 16, DK = 8) on random inputs in
// three configurations: self attention, masked self attention, and
// attention with different query and key/value lengths. The reference
// repeats the integer projections and scores (same rounding as the
// hardware) and then uses the exact exponential, so the outputs are
// compared with a tolerance scaled to the V values. It also counts the
// masked scores (n(n-1)/2 for a masked row set) and checks that every
// output word is written exactly once.
module tb_attention_head;
  import ftrans_pkg::*;
  localparam int D = 16, DK = 8, L = 8, NBD = D / BLK, TW = $clog2(L);
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;
  always #5 clk = ~clk;

  logic start, mask_en, done, busy, wl_en, o_we, ev_mask;
  logic [TW:0] n_q, n_kv;
  logic [TW-1:0] xq_tok, xkv_tok, o_tok;
  logic [$clog2(NBD)-1:0] xq_blk, xkv_blk;
  blk_t xq_data, xkv_data;
  logic [1:0] wl_mat;
  logic [19:0] wl_addr;
  word_t wl_data, o_data;
  logic [$clog2(DK)-1:0] o_col;

  attention_head #(.D(D), .DK(DK), .L_MAX(L)) dut (.*);

  int X [L][D], Y [L][D], WQ [D][DK], WK [D][DK], WV [D][DK];
  int got [L][DK], seen [L][DK];
  int checks = 0, failures = 0, nmask = 0;

  always_comb
    for (int l = 0; l < BLK; l++) begin
      xq_data[l]  = word_t'(X[xq_tok][int'(xq_blk) * BLK + l]);
      xkv_data[l] = word_t'(Y[xkv_tok][int'(xkv_blk) * BLK + l]);
    end

  always @(posedge clk) if (rst_n) begin
    if (o_we) begin got[o_tok][o_col] = int'(o_data); seen[o_tok][o_col]++; end
    if (ev_mask) nmask++;
  end

  function automatic int rs(longint v, int sh);
    longint r;
    r = (v + (longint'(1) << (sh - 1))) >>> sh;
    if (r > 32767) r = 32767;
    if (r < -32768) r = -32768;
    return int'(r);
  endfunction

  task automatic run(input int nq, input int nkv, input bit msk);
    int q [L][DK], k [L][DK], v [L][DK];
    int inv;
    inv = $rtoi(32768.0 / $sqrt(real'(DK)) + 0.5);
    for (int t = 0; t < L; t++) for (int c = 0; c < D; c++) begin
      X[t][c] = int'($urandom_range(0, 512)) - 256;
      Y[t][c] = int'($urandom_range(0, 512)) - 256;
    end
    for (int t = 0; t < L; t++) for (int o = 0; o < DK; o++) begin seen[t][o] = 0; got[t][o] = 0; end
    nmask = 0;
    @(negedge clk);
    start = 1; n_q = (TW+1)'(nq); n_kv = (TW+1)'(nkv); mask_en = msk;
    @(negedge clk) start = 0;
    wait (done);
    @(negedge clk);
    // reference
    for (int t = 0; t < L; t++) for (int o = 0; o < DK; o++) begin
      longint aq, ak, av;
      aq = 0; ak = 0; av = 0;
      for (int c = 0; c < D; c++) begin
        aq += X[t][c] * WQ[c][o]; ak += Y[t][c] * WK[c][o]; av += Y[t][c] * WV[c][o];
      end
      q[t][o] = rs(aq, 8); k[t][o] = rs(ak, 8); v[t][o] = rs(av, 8);
    end
    for (int t = 0; t < nq; t++) begin
      real sc [L], mx, sum, pr [L];
      mx = -1.0e9; sum = 0.0;
      for (int s = 0; s < nkv; s++) begin
        longint a; int sq;
        a = 0;
        for (int o = 0; o < DK; o++) a += q[t][o] * k[s][o];
        sq = rs(longint'(rs(a, 8)) * inv, 15);
        sc[s] = sq / 256.0;
        if (!(msk && s > t) && sc[s] > mx) mx = sc[s];
      end
      for (int s = 0; s < nkv; s++) begin
        pr[s] = (msk && s > t) ? 0.0 : $exp(sc[s] - mx);
        sum += pr[s];
      end
      for (int o = 0; o < DK; o++) begin
        real e, tol;
        e = 0.0; tol = 3.0;
        for (int s = 0; s < nkv; s++) begin
          e += pr[s] / sum * v[s][o];
          tol += 0.035 * ((v[s][o] < 0) ? -v[s][o] : v[s][o]);
        end
        checks++;
        if ((got[t][o] - e > tol) || (e - got[t][o] > tol) || seen[t][o] != 1) begin
          failures++;
          if (failures < 10) $display("FAIL nq%0d nkv%0d m%0d t%0d o%0d got %0d exp %f (seen %0d)", nq, nkv, msk, t, o, got[t][o], e, seen[t][o]);
        end
      end
    end
    checks++;
    if (msk && nmask != nq * (nq - 1) / 2) begin failures++; $display("FAIL mask count %0d", nmask); end
    if (!msk && nmask != 0) begin failures++; $display("FAIL mask count %0d", nmask); end
  endtask

  initial begin
    start = 0; mask_en = 0; n_q = '0; n_kv = '0; wl_en = 0; wl_mat = '0; wl_addr = '0; wl_data = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int m = 0; m < 3; m++)
      for (int r = 0; r < D; r++) for (int c = 0; c < DK; c++) begin
        int w;
        w = int'($urandom_range(0, 128)) - 64;
        if (m == 0) WQ[r][c] = w; else if (m == 1) WK[r][c] = w; else WV[r][c] = w;
        @(negedge clk);
        wl_en = 1; wl_mat = 2'(m); wl_addr = 20'(r * DK + c); wl_data = word_t'(w);
      end
    @(negedge clk) wl_en = 0;
    run(L, L, 1'b0);
    run(L, L, 1'b1);
    run(5, 7, 1'b0);
    run(6, 6, 1'b1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
