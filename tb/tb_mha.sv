// tb_mha: multi-head attention with D = 16, two heads of DK = 8 and random
// weights for Q, K, V of both heads and the output projection, loaded over
// the weight bus. Runs self attention, masked self attention and attention
// with separate query and key/value inputs. The reference repeats the
// integer projections and scores and uses the exact exponential; the head
// results are concatenated and projected in real arithmetic, so the outputs
// are compared with a tolerance propagated from the head tolerance through
// the output weights. Also checks the mask pulse count and that every
// output word is written exactly once.
module tb_mha;
  import ftrans_pkg::*;
  localparam int D = 16, H = 2, DK = 8, L = 6, NBD = D / BLK, TW = $clog2(L);
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;
  always #5 clk = ~clk;

  logic start, mask_en, done, o_we, ev_mask;
  logic [TW:0] n_q, n_kv;
  logic [TW-1:0] xq_tok, xkv_tok, o_tok;
  logic [$clog2(NBD)-1:0] xq_blk, xkv_blk;
  blk_t xq_data, xkv_data;
  wload_t wl;
  logic [$clog2(D)-1:0] o_col;
  word_t o_data;

  mha #(.D(D), .H(H), .DK(DK), .L_MAX(L)) dut (.*);

  int X [L][D], Y [L][D], W [H][3][D][DK], WO [D][D];
  int got [L][D], seen [L][D];
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

  task automatic run(input int nq, input int nkv, input bit msk, input bit same);
    int inv;
    real hd [L][D], ht [L][D];
    inv = $rtoi(32768.0 / $sqrt(real'(DK)) + 0.5);
    for (int t = 0; t < L; t++) for (int c = 0; c < D; c++) begin
      X[t][c] = int'($urandom_range(0, 512)) - 256;
      Y[t][c] = same ? X[t][c] : int'($urandom_range(0, 512)) - 256;
      seen[t][c] = 0; got[t][c] = 0;
    end
    nmask = 0;
    @(negedge clk);
    start = 1; n_q = (TW+1)'(nq); n_kv = (TW+1)'(nkv); mask_en = msk;
    @(negedge clk) start = 0;
    wait (done);
    @(posedge clk);
    @(negedge clk);
    for (int h = 0; h < H; h++) begin
      int q [L][DK], k [L][DK], v [L][DK];
      for (int t = 0; t < L; t++) for (int o = 0; o < DK; o++) begin
        longint aq, ak, av;
        aq = 0; ak = 0; av = 0;
        for (int c = 0; c < D; c++) begin
          aq += X[t][c] * W[h][0][c][o]; ak += Y[t][c] * W[h][1][c][o]; av += Y[t][c] * W[h][2][c][o];
        end
        q[t][o] = rs(aq, 8); k[t][o] = rs(ak, 8); v[t][o] = rs(av, 8);
      end
      for (int t = 0; t < nq; t++) begin
        real sc [L], mx, sum, pr [L];
        mx = -1.0e9; sum = 0.0;
        for (int s = 0; s < nkv; s++) begin
          longint a;
          a = 0;
          for (int o = 0; o < DK; o++) a += q[t][o] * k[s][o];
          sc[s] = rs(longint'(rs(a, 8)) * inv, 15) / 256.0;
          if (!(msk && s > t) && sc[s] > mx) mx = sc[s];
        end
        for (int s = 0; s < nkv; s++) begin
          pr[s] = (msk && s > t) ? 0.0 : $exp(sc[s] - mx);
          sum += pr[s];
        end
        for (int o = 0; o < DK; o++) begin
          hd[t][h*DK + o] = 0.0; ht[t][h*DK + o] = 3.0;
          for (int s = 0; s < nkv; s++) begin
            hd[t][h*DK + o] += pr[s] / sum * v[s][o];
            ht[t][h*DK + o] += 0.035 * ((v[s][o] < 0) ? -v[s][o] : v[s][o]);
          end
        end
      end
    end
    for (int t = 0; t < nq; t++) for (int o = 0; o < D; o++) begin
      real e, tol;
      e = 0.0; tol = 1.0;
      for (int c = 0; c < D; c++) begin
        e   += hd[t][c] * WO[c][o] / 256.0;
        tol += ht[t][c] * ((WO[c][o] < 0) ? -WO[c][o] : WO[c][o]) / 256.0;
      end
      checks++;
      if ((got[t][o] - e > tol) || (e - got[t][o] > tol) || seen[t][o] != 1) begin
        failures++;
        if (failures < 10) $display("FAIL nq%0d nkv%0d m%0d t%0d o%0d got %0d exp %f tol %f (seen %0d)", nq, nkv, msk, t, o, got[t][o], e, tol, seen[t][o]);
      end
    end
    checks++;
    if (nmask != (msk ? nq * (nq - 1) / 2 : 0)) begin failures++; $display("FAIL mask count %0d", nmask); end
  endtask

  task automatic put(input logic [3:0] hd, input logic [1:0] mat, input int addr, input int val);
    @(negedge clk);
    wl = '0;
    wl.en = 1'b1; wl.head = hd; wl.mat = mat; wl.addr = 20'(addr); wl.data = 32'(val);
  endtask

  initial begin
    start = 0; mask_en = 0; n_q = '0; n_kv = '0; wl = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int h = 0; h < H; h++)
      for (int m = 0; m < 3; m++)
        for (int r = 0; r < D; r++) for (int c = 0; c < DK; c++) begin
          W[h][m][r][c] = int'($urandom_range(0, 128)) - 64;
          put(4'(h), 2'(m), r * DK + c, W[h][m][r][c]);
        end
    for (int r = 0; r < D; r++) for (int c = 0; c < D; c++) begin
      WO[r][c] = int'($urandom_range(0, 96)) - 48;
      put(4'd0, M_FC, r * D + c, WO[r][c]);
    end
    @(negedge clk) wl = '0;
    run(L, L, 1'b0, 1'b1);
    run(L, L, 1'b1, 1'b1);
    run(4, 6, 1'b0, 1'b0);
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
