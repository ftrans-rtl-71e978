// decoder_layer: one Transformer decoder layer.
//
//   y1 = AddNorm(MaskedMHA(x, x, x) + x)
//   y2 = AddNorm(MHA(y1, enc, enc) + y1)
//   y  = AddNorm(FFN(y2) + y2)
//
// The first attention is masked: position t may only attend to positions
// <= t. The second attention takes its queries from the decoder and its keys
// and values from the encoder output held in the encoder-to-decoder buffer
// (n_src tokens). Sub-units and buffers are as in encoder_layer, with one
// more attention unit and one more add/norm; a sequencer starts them in
// order.
//
// The three sub-layers, the masking of future tokens and the attention over
// the encoder output follow the paper; dedicated (not time-shared) units for
// the two attentions and strict sequencing are this design's choices.
//
// Interface: start pulse with n_tok (target tokens) and n_src held; done
// pulse at the end. Reads: x through ports a and b, the encoder output
// through port enc. wl carries this layer's weights (U_MHA1, U_MHA2, U_FFN1/2,
// U_NORM1/2/3). Output: masked block-write stream.
module decoder_layer
  import ftrans_pkg::*;
#(
  parameter int D     = 200,
  parameter int H     = 4,
  parameter int DFF   = 4 * D,
  parameter int L_MAX = 64,
  localparam int NBD = (D + BLK - 1) / BLK
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      start,
  input  logic [$clog2(L_MAX):0]    n_tok,
  input  logic [$clog2(L_MAX):0]    n_src,
  output logic                      done,
  output logic [$clog2(L_MAX)-1:0]  xa_tok,
  output logic [$clog2(NBD)-1:0]    xa_blk,
  input  blk_t                      xa_data,
  output logic [$clog2(L_MAX)-1:0]  xb_tok,
  output logic [$clog2(NBD)-1:0]    xb_blk,
  input  blk_t                      xb_data,
  output logic [$clog2(L_MAX)-1:0]  enc_tok,
  output logic [$clog2(NBD)-1:0]    enc_blk,
  input  blk_t                      enc_data,
  input  wload_t                    wl,
  output logic                      o_we,
  output logic [$clog2(L_MAX)-1:0]  o_tok,
  output logic [$clog2(NBD)-1:0]    o_blk,
  output logic [BLK-1:0]            o_mask,
  output blk_t                      o_data,
  output logic                      ev_mask,
  output logic                      ev_cross,   // pulse when the cross attention finishes
  output logic                      ev_fft
);
  localparam int TW  = $clog2(L_MAX);
  localparam int BW  = $clog2(NBD);
  localparam int CW  = $clog2(D);

  typedef enum logic [2:0] {S_IDLE, S_MHA1, S_N1, S_MHA2, S_N2, S_FFN, S_N3} state_t;
  state_t state;

  logic st_m1, st_n1, st_m2, st_n2, st_f, st_n3;
  logic dn_m1, dn_n1, dn_m2, dn_n2, dn_f, dn_n3;

  wload_t wl_m1, wl_m2;
  always_comb begin
    wl_m1    = wl;
    wl_m1.en = wl.en && wl.unit == U_MHA1;
    wl_m2    = wl;
    wl_m2.en = wl.en && wl.unit == U_MHA2;
  end

  blk_t          b1_a, b1_b, b2_a, b2_b, b3_a, b3_b, b4_a, b4_b, b5_a, b5_b;
  logic [TW-1:0] n1_atok, m2_qtok, n2_atok, n2_rtok, f_tok, n3_atok, n3_rtok, m1_kvtok;
  logic [BW-1:0] n1_ablk, m2_qblk, n2_ablk, n2_rblk, f_blk, n3_ablk, n3_rblk, m1_kvblk;

  // ---------------------------------------------------------------- masked self attention -> buf1
  logic          m1_we, m1_ev;
  logic [TW-1:0] m1_tok;
  logic [CW-1:0] m1_col;
  word_t         m1_data;

  mha #(.D(D), .H(H), .DK(D / H), .L_MAX(L_MAX)) u_mha1 (
    .clk, .rst_n, .start(st_m1), .mask_en(1'b1), .n_q(n_tok), .n_kv(n_tok), .done(dn_m1),
    .xq_tok(xa_tok), .xq_blk(xa_blk), .xq_data(xa_data),
    .xkv_tok(m1_kvtok), .xkv_blk(m1_kvblk), .xkv_data(xa_data),
    .wl(wl_m1), .o_we(m1_we), .o_tok(m1_tok), .o_col(m1_col), .o_data(m1_data), .ev_mask(m1_ev)
  );

  seq_buf #(.L(L_MAX), .D(D)) u_buf1 (
    .clk, .we(m1_we), .wtok(m1_tok), .wblk(BW'(int'(m1_col) / BLK)),
    .wmask(BLK'(1) << (int'(m1_col) % BLK)), .wdata({BLK{m1_data}}),
    .ra_tok(n1_atok), .ra_blk(n1_ablk), .ra_data(b1_a),
    .rb_tok('0), .rb_blk('0), .rb_data(b1_b)
  );

  logic          n1_we;
  logic [TW-1:0] n1_tok;
  logic [CW-1:0] n1_col;
  word_t         n1_data;

  add_norm #(.D(D), .L_MAX(L_MAX)) u_norm1 (
    .clk, .rst_n, .start(st_n1), .n_tok, .done(dn_n1),
    .a_tok(n1_atok), .a_blk(n1_ablk), .a_data(b1_a),
    .r_tok(xb_tok), .r_blk(xb_blk), .r_data(xb_data),
    .wl_en(wl.en && wl.unit == U_NORM1), .wl_addr(wl.addr), .wl_data(wl.data),
    .o_we(n1_we), .o_tok(n1_tok), .o_col(n1_col), .o_data(n1_data)
  );

  seq_buf #(.L(L_MAX), .D(D)) u_buf2 (
    .clk, .we(n1_we), .wtok(n1_tok), .wblk(BW'(int'(n1_col) / BLK)),
    .wmask(BLK'(1) << (int'(n1_col) % BLK)), .wdata({BLK{n1_data}}),
    .ra_tok(m2_qtok), .ra_blk(m2_qblk), .ra_data(b2_a),
    .rb_tok(n2_rtok), .rb_blk(n2_rblk), .rb_data(b2_b)
  );

  // ---------------------------------------------------------------- attention over the encoder output -> buf3
  logic          m2_we, m2_ev;
  logic [TW-1:0] m2_tok;
  logic [CW-1:0] m2_col;
  word_t         m2_data;

  mha #(.D(D), .H(H), .DK(D / H), .L_MAX(L_MAX)) u_mha2 (
    .clk, .rst_n, .start(st_m2), .mask_en(1'b0), .n_q(n_tok), .n_kv(n_src), .done(dn_m2),
    .xq_tok(m2_qtok), .xq_blk(m2_qblk), .xq_data(b2_a),
    .xkv_tok(enc_tok), .xkv_blk(enc_blk), .xkv_data(enc_data),
    .wl(wl_m2), .o_we(m2_we), .o_tok(m2_tok), .o_col(m2_col), .o_data(m2_data), .ev_mask(m2_ev)
  );

  seq_buf #(.L(L_MAX), .D(D)) u_buf3 (
    .clk, .we(m2_we), .wtok(m2_tok), .wblk(BW'(int'(m2_col) / BLK)),
    .wmask(BLK'(1) << (int'(m2_col) % BLK)), .wdata({BLK{m2_data}}),
    .ra_tok(n2_atok), .ra_blk(n2_ablk), .ra_data(b3_a),
    .rb_tok('0), .rb_blk('0), .rb_data(b3_b)
  );

  logic          n2_we;
  logic [TW-1:0] n2_tok;
  logic [CW-1:0] n2_col;
  word_t         n2_data;

  add_norm #(.D(D), .L_MAX(L_MAX)) u_norm2 (
    .clk, .rst_n, .start(st_n2), .n_tok, .done(dn_n2),
    .a_tok(n2_atok), .a_blk(n2_ablk), .a_data(b3_a),
    .r_tok(n2_rtok), .r_blk(n2_rblk), .r_data(b2_b),
    .wl_en(wl.en && wl.unit == U_NORM2), .wl_addr(wl.addr), .wl_data(wl.data),
    .o_we(n2_we), .o_tok(n2_tok), .o_col(n2_col), .o_data(n2_data)
  );

  seq_buf #(.L(L_MAX), .D(D)) u_buf4 (
    .clk, .we(n2_we), .wtok(n2_tok), .wblk(BW'(int'(n2_col) / BLK)),
    .wmask(BLK'(1) << (int'(n2_col) % BLK)), .wdata({BLK{n2_data}}),
    .ra_tok(f_tok), .ra_blk(f_blk), .ra_data(b4_a),
    .rb_tok(n3_rtok), .rb_blk(n3_rblk), .rb_data(b4_b)
  );

  // ---------------------------------------------------------------- FFN -> buf5
  logic          f_we;
  logic [TW-1:0] f_wtok;
  logic [BW-1:0] f_wblk;
  blk_t          f_data;

  ffn_bcm #(.D(D), .DFF(DFF), .L_MAX(L_MAX)) u_ffn (
    .clk, .rst_n, .start(st_f), .n_tok, .done(dn_f),
    .x_tok(f_tok), .x_blk(f_blk), .x_data(b4_a),
    .wl1_en(wl.en && wl.unit == U_FFN1), .wl2_en(wl.en && wl.unit == U_FFN2),
    .wl_addr(wl.addr), .wl_data(wl.data),
    .o_we(f_we), .o_tok(f_wtok), .o_blk(f_wblk), .o_data(f_data), .ev_fft
  );

  seq_buf #(.L(L_MAX), .D(D)) u_buf5 (
    .clk, .we(f_we), .wtok(f_wtok), .wblk(f_wblk), .wmask('1), .wdata(f_data),
    .ra_tok(n3_atok), .ra_blk(n3_ablk), .ra_data(b5_a),
    .rb_tok('0), .rb_blk('0), .rb_data(b5_b)
  );

  logic          n3_we;
  logic [TW-1:0] n3_tok;
  logic [CW-1:0] n3_col;
  word_t         n3_data;

  add_norm #(.D(D), .L_MAX(L_MAX)) u_norm3 (
    .clk, .rst_n, .start(st_n3), .n_tok, .done(dn_n3),
    .a_tok(n3_atok), .a_blk(n3_ablk), .a_data(b5_a),
    .r_tok(n3_rtok), .r_blk(n3_rblk), .r_data(b4_b),
    .wl_en(wl.en && wl.unit == U_NORM3), .wl_addr(wl.addr), .wl_data(wl.data),
    .o_we(n3_we), .o_tok(n3_tok), .o_col(n3_col), .o_data(n3_data)
  );

  assign o_we     = n3_we;
  assign o_tok    = n3_tok;
  assign o_blk    = BW'(int'(n3_col) / BLK);
  assign o_mask   = BLK'(1) << (int'(n3_col) % BLK);
  assign o_data   = {BLK{n3_data}};
  assign ev_mask  = m1_ev || m2_ev;
  assign ev_cross = dn_m2;

  // ---------------------------------------------------------------- sequencer
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      {st_m1, st_n1, st_m2, st_n2, st_f, st_n3} <= '0;
      done  <= 1'b0;
    end else begin
      {st_m1, st_n1, st_m2, st_n2, st_f, st_n3} <= '0;
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin st_m1 <= 1'b1; state <= S_MHA1; end
        S_MHA1: if (dn_m1)  begin st_n1 <= 1'b1; state <= S_N1;   end
        S_N1:   if (dn_n1)  begin st_m2 <= 1'b1; state <= S_MHA2; end
        S_MHA2: if (dn_m2)  begin st_n2 <= 1'b1; state <= S_N2;   end
        S_N2:   if (dn_n2)  begin st_f  <= 1'b1; state <= S_FFN;  end
        S_FFN:  if (dn_f)   begin st_n3 <= 1'b1; state <= S_N3;   end
        S_N3:   if (dn_n3)  begin done  <= 1'b1; state <= S_IDLE; end
        default: state <= S_IDLE;
      endcase
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) (m1_kvtok == xa_tok && m1_kvblk == xa_blk));

  logic unused;
  assign unused = ^{b1_b, b3_b, b5_b};

endmodule
