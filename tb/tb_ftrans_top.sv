// tb_ftrans_top: the whole accelerator end to end at reduced size (D = 16,
// two heads, DFF = 32, sentences of up to 4 tokens, one encoder and one
// decoder layer). A behavioural DDR read channel with random back-pressure
// and random in-order latency holds an embedding table whose rows are a hash
// of the address. All weights are random and loaded over the weight bus.
// Checks, all on the result read port:
//  - every result row is layer-normalised (mean ~0, variance ~1);
//  - causality: changing the last target token id leaves the earlier result
//    rows bit-identical and changes the last one;
//  - source order: permuting the source sentence leaves the decoder result
//    bit-identical (the encoder is permutation-equivariant and cross
//    attention does not depend on key order), while a different source word
//    changes it;
//  - encoder-only mode: the result is the encoder output, whose rows permute
//    with the source tokens;
//  - event counts per run: masked scores n(n-1)/2, one cross attention per
//    decoder layer, FFT blocks and embedding beats as the sizes require.
// Each mechanism (masking, cross attention, FFT blocks, DDR fetches, DDR
// back-pressure, encoder-only runs) must have happened at least once.
module tb_ftrans_top;
  import ftrans_pkg::*;
  localparam int D = 16, H = 2, DK = D / H, DFF = 32, L = 4, NE = 1, ND = 1;
  localparam int NBD = D / BLK, NB2 = DFF / BLK, TW = $clog2(L);
  localparam real PI = 3.14159265358979323846;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;
  always #5 clk = ~clk;

  logic start, enc_only, busy, done, tok_we, tok_tgt;
  logic [TW:0] n_src, n_tgt;
  logic [TW-1:0] tok_idx, out_tok;
  logic [15:0] tok_id;
  wload_t wl;
  logic [31:0] emb_base_src, emb_base_tgt, ddr_req_addr;
  logic ddr_req_valid, ddr_req_ready, ddr_rsp_valid;
  logic [BLK*DATA_W-1:0] ddr_rsp_data;
  logic [$clog2(NBD)-1:0] out_blk;
  blk_t out_data;
  logic ev_mask, ev_cross, ev_fft;

  ftrans_top #(.D(D), .H(H), .DFF(DFF), .L_MAX(L), .N_ENC(NE), .N_DEC(ND)) dut (.*);

  int checks = 0, failures = 0;
  int nmask = 0, ncross = 0, nfft = 0, nreq = 0, nstall = 0, nenc_only = 0;
  int tmask, tcross, tfft, treq;

  function automatic blk_t row(logic [31:0] a);
    blk_t b;
    for (int l = 0; l < BLK; l++) b[l] = word_t'(int'(((a * 32'd2654435761) >> (l * 3)) & 32'h3FF) - 512);
    return b;
  endfunction

  logic [31:0] q_addr [$];
  int q_due [$];
  int cyc = 0;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    ddr_rsp_valid <= 1'b0;
    if (rst_n) begin
      if (ddr_req_valid && ddr_req_ready) begin
        q_addr.push_back(ddr_req_addr);
        q_due.push_back(cyc + int'($urandom_range(2, 6)));
        nreq++;
      end
      if (ddr_req_valid && !ddr_req_ready) nstall++;
      if (q_addr.size() > 0 && q_due[0] <= cyc) begin
        ddr_rsp_valid <= 1'b1;
        ddr_rsp_data  <= row(q_addr[0]);
        void'(q_addr.pop_front());
        void'(q_due.pop_front());
      end
      ddr_req_ready <= ($urandom_range(0, 3) != 0);
      if (ev_mask) nmask++;
      if (ev_cross) ncross++;
      if (ev_fft) nfft++;
    end
  end

  task automatic put(input int layer, input logic [3:0] unit, input logic [3:0] hd, input logic [1:0] mat,
                     input int addr, input logic [31:0] val);
    @(negedge clk);
    wl = '0;
    wl.en = 1'b1; wl.layer = 4'(layer); wl.unit = unit; wl.head = hd; wl.mat = mat;
    wl.addr = 20'(addr); wl.data = val;
  endtask

  task automatic put_mha(input int layer, input logic [3:0] unit);
    for (int h = 0; h < H; h++) for (int m = 0; m < 3; m++)
      for (int a = 0; a < D * DK; a++) put(layer, unit, 4'(h), 2'(m), a, 32'(int'($urandom_range(0, 128)) - 64));
    for (int a = 0; a < D * D; a++) put(layer, unit, 4'd0, M_FC, a, 32'(int'($urandom_range(0, 96)) - 48));
  endtask

  task automatic put_bcm(input int layer, input logic [3:0] unit, input int f, input int g, input int amp);
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
        put(layer, unit, 4'd0, 2'd0, (i * g + j) * BLK + k,
            {16'($rtoi(im + (im >= 0 ? 0.5 : -0.5))), 16'($rtoi(re + (re >= 0 ? 0.5 : -0.5)))});
      end
    end
  endtask

  int src [L], tgt [L], res [L][D];

  task automatic run(input bit eo, input int ns, input int nt);
    for (int t = 0; t < L; t++) begin
      @(negedge clk);
      tok_we = 1; tok_tgt = 0; tok_idx = TW'(t); tok_id = 16'(src[t]);
      @(negedge clk);
      tok_tgt = 1; tok_id = 16'(tgt[t]);
    end
    @(negedge clk) tok_we = 0;
    tmask = nmask; tcross = ncross; tfft = nfft; treq = nreq;
    start = 1; enc_only = eo; n_src = (TW+1)'(ns); n_tgt = (TW+1)'(nt);
    @(negedge clk) start = 0;
    wait (done);
    @(negedge clk);
    if (eo) nenc_only++;
    for (int t = 0; t < L; t++) for (int b = 0; b < NBD; b++) begin
      out_tok = TW'(t); out_blk = ($clog2(NBD))'(b);
      #1;
      for (int l = 0; l < BLK; l++) res[t][b*BLK + l] = int'(out_data[l]);
    end
    for (int t = 0; t < (eo ? ns : nt); t++) begin
      real m, v;
      m = 0.0; v = 0.0;
      for (int c = 0; c < D; c++) begin m += res[t][c] / 256.0; v += (res[t][c] / 256.0) ** 2; end
      m = m / D; v = v / D - m * m;
      checks++;
      if (m > 0.05 || m < -0.05 || v < 0.85 || v > 1.1) begin
        failures++; $display("FAIL eo%0d t%0d row mean %f var %f", eo, t, m, v);
      end
    end
    checks += 4;
    if (nmask - tmask != (eo ? 0 : ND * nt * (nt - 1) / 2)) begin failures++; $display("FAIL mask pulses %0d", nmask - tmask); end
    if (ncross - tcross != (eo ? 0 : ND)) begin failures++; $display("FAIL cross pulses %0d", ncross - tcross); end
    if (nfft - tfft != (NE * ns + (eo ? 0 : ND * nt)) * (NBD + NB2)) begin failures++; $display("FAIL fft blocks %0d", nfft - tfft); end
    if (nreq - treq != (ns + (eo ? 0 : nt)) * NBD) begin failures++; $display("FAIL embedding beats %0d", nreq - treq); end
  endtask

  task automatic same_rows(input int r0 [L][D], input int upto, input string what);
    for (int t = 0; t < upto; t++) for (int c = 0; c < D; c++) begin
      checks++;
      if (res[t][c] != r0[t][c]) begin
        failures++;
        if (failures < 10) $display("FAIL %s t%0d c%0d got %0d exp %0d", what, t, c, res[t][c], r0[t][c]);
      end
    end
  endtask

  initial begin
    int r0 [L][D];
    int diff;
    start = 0; enc_only = 0; n_src = '0; n_tgt = '0; tok_we = 0; tok_tgt = 0; tok_idx = '0; tok_id = '0;
    wl = '0; emb_base_src = 32'h0000_1000; emb_base_tgt = 32'h0004_0000;
    ddr_req_ready = 0; ddr_rsp_valid = 0; ddr_rsp_data = '0; out_tok = '0; out_blk = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int k = 0; k < NE + ND; k++) begin
      put_mha(k, U_MHA1);
      if (k >= NE) put_mha(k, U_MHA2);
      put_bcm(k, U_FFN1, NB2, NBD, 64);
      put_bcm(k, U_FFN2, NBD, NB2, 32);
    end
    @(negedge clk) wl = '0;
    for (int t = 0; t < L; t++) begin src[t] = 10 + 7 * t; tgt[t] = 300 + 5 * t; end

    run(1'b0, L, L);
    r0 = res;
    // causality
    tgt[L-1] = 999;
    run(1'b0, L, L);
    same_rows(r0, L - 1, "causality");
    diff = 0;
    for (int c = 0; c < D; c++) if (res[L-1][c] != r0[L-1][c]) diff++;
    checks++;
    if (diff == 0) begin failures++; $display("FAIL last target token had no effect"); end
    // source order does not matter to the decoder
    r0 = res;
    begin
      int s0;
      s0 = src[0]; src[0] = src[2]; src[2] = s0;
    end
    run(1'b0, L, L);
    same_rows(r0, L, "source order");
    // a different source word does
    src[1] = 777;
    run(1'b0, L, L);
    diff = 0;
    for (int t = 0; t < L; t++) for (int c = 0; c < D; c++) if (res[t][c] != r0[t][c]) diff++;
    checks++;
    if (diff == 0) begin failures++; $display("FAIL source sentence had no effect"); end
    // encoder-only: rows permute with the source tokens
    run(1'b1, L, L);
    r0 = res;
    begin
      int s0;
      s0 = src[0]; src[0] = src[3]; src[3] = s0;
    end
    run(1'b1, L, L);
    begin
      int tmp [L][D];
      tmp = r0;
      r0[0] = tmp[3]; r0[3] = tmp[0];
    end
    same_rows(r0, L, "encoder permutation");
    // shorter sentences
    run(1'b0, 3, 2);

    checks += 6;
    if (nmask == 0)     begin failures++; $display("FAIL no masked score seen"); end
    if (ncross == 0)    begin failures++; $display("FAIL no cross attention seen"); end
    if (nfft == 0)      begin failures++; $display("FAIL no FFT block seen"); end
    if (nreq == 0)      begin failures++; $display("FAIL no embedding fetch seen"); end
    if (nstall == 0)    begin failures++; $display("FAIL no memory back-pressure seen"); end
    if (nenc_only == 0) begin failures++; $display("FAIL no encoder-only run"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
