// encoder_layer: one Transformer encoder layer.
//
//   y1 = AddNorm(MHA(x, x, x) + x)
//   y  = AddNorm(FFN(y1) + y1)
//
// The layer owns its sub-units (multi-head attention, two add/norm units, a
// BCM feed-forward network) and the buffers between them, and a small
// sequencer that starts them one after another. Its input is read from the
// previous layer's buffer through two read ports (port a feeds the attention,
// port b the residual of the first add/norm); its output leaves as a masked
// block-write stream for the next buffer.
//
// The sub-layer order, the residual connections and the use of the
// multi-head attention, add/norm and FFT/IFFT feed-forward units follow the
// paper; running the sub-layers strictly in sequence is this design's
// choice.
//
// Interface: start pulse with n_tok held, done pulse at the end. wl carries
// weights already selected for this layer (unit codes U_MHA1, U_FFN1/2,
// U_NORM1/2).
module encoder_layer
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
  output logic                      done,
  output logic [$clog2(L_MAX)-1:0]  xa_tok,
  output logic [$clog2(NBD)-1:0]    xa_blk,
  input  blk_t                      xa_data,
  output logic [$clog2(L_MAX)-1:0]  xb_tok,
  output logic [$clog2(NBD)-1:0]    xb_blk,
  input  blk_t                      xb_data,
  input  wload_t                    wl,
  output logic                      o_we,
  output logic [$clog2(L_MAX)-1:0]  o_tok,
  output logic [$clog2(NBD)-1:0]    o_blk,
  output logic [BLK-1:0]            o_mask,
  output blk_t                      o_data,
  output logic                      ev_fft
);
  localparam int TW  = $clog2(L_MAX);
  localparam int BW  = $clog2(NBD);
  localparam int CW  = $clog2(D);

  typedef enum logic [2:0] {S_IDLE, S_MHA, S_N1, S_FFN, S_N2} state_t;
  state_t state;

  logic st_mha, st_n1, st_ffn, st_n2, dn_mha, dn_n1, dn_ffn, dn_n2;

  wload_t wl_mha;
  always_comb begin
    wl_mha    = wl;
    wl_mha.en = wl.en && wl.unit == U_MHA1;
  end

  // ---------------------------------------------------------------- attention -> buf1
  logic            m_we, m_ev;
  logic [TW-1:0]   m_tok, m_kvtok;
  logic [CW-1:0]   m_col;
  logic [BW-1:0]   m_kvblk;
  word_t           m_data;
  blk_t            b1_a, b1_b, b2_a, b2_b, b3_a, b3_b;
  logic [TW-1:0]   n1_atok, f_tok, n2_atok, n2_rtok;
  logic [BW-1:0]   n1_ablk, f_blk, n2_ablk, n2_rblk;

  mha #(.D(D), .H(H), .DK(D / H), .L_MAX(L_MAX)) u_mha (
    .clk, .rst_n, .start(st_mha), .mask_en(1'b0), .n_q(n_tok), .n_kv(n_tok), .done(dn_mha),
    .xq_tok(xa_tok), .xq_blk(xa_blk), .xq_data(xa_data),
    .xkv_tok(m_kvtok), .xkv_blk(m_kvblk), .xkv_data(xa_data),
    .wl(wl_mha), .o_we(m_we), .o_tok(m_tok), .o_col(m_col), .o_data(m_data), .ev_mask(m_ev)
  );

  seq_buf #(.L(L_MAX), .D(D)) u_buf1 (
    .clk, .we(m_we), .wtok(m_tok), .wblk(BW'(int'(m_col) / BLK)),
    .wmask(BLK'(1) << (int'(m_col) % BLK)), .wdata({BLK{m_data}}),
    .ra_tok(n1_atok), .ra_blk(n1_ablk), .ra_data(b1_a),
    .rb_tok('0), .rb_blk('0), .rb_data(b1_b)
  );

  // ---------------------------------------------------------------- add/norm 1 -> buf2
  logic            n1_we;
  logic [TW-1:0]   n1_tok;
  logic [CW-1:0]   n1_col;
  word_t           n1_data;

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
    .ra_tok(f_tok), .ra_blk(f_blk), .ra_data(b2_a),
    .rb_tok(n2_rtok), .rb_blk(n2_rblk), .rb_data(b2_b)
  );

  // ---------------------------------------------------------------- FFN -> buf3
  logic            f_we;
  logic [TW-1:0]   f_wtok;
  logic [BW-1:0]   f_wblk;
  blk_t            f_data;

  ffn_bcm #(.D(D), .DFF(DFF), .L_MAX(L_MAX)) u_ffn (
    .clk, .rst_n, .start(st_ffn), .n_tok, .done(dn_ffn),
    .x_tok(f_tok), .x_blk(f_blk), .x_data(b2_a),
    .wl1_en(wl.en && wl.unit == U_FFN1), .wl2_en(wl.en && wl.unit == U_FFN2),
    .wl_addr(wl.addr), .wl_data(wl.data),
    .o_we(f_we), .o_tok(f_wtok), .o_blk(f_wblk), .o_data(f_data), .ev_fft
  );

  seq_buf #(.L(L_MAX), .D(D)) u_buf3 (
    .clk, .we(f_we), .wtok(f_wtok), .wblk(f_wblk), .wmask('1), .wdata(f_data),
    .ra_tok(n2_atok), .ra_blk(n2_ablk), .ra_data(b3_a),
    .rb_tok('0), .rb_blk('0), .rb_data(b3_b)
  );

  // ---------------------------------------------------------------- add/norm 2 -> output
  logic            n2_we;
  logic [TW-1:0]   n2_tok;
  logic [CW-1:0]   n2_col;
  word_t           n2_data;

  add_norm #(.D(D), .L_MAX(L_MAX)) u_norm2 (
    .clk, .rst_n, .start(st_n2), .n_tok, .done(dn_n2),
    .a_tok(n2_atok), .a_blk(n2_ablk), .a_data(b3_a),
    .r_tok(n2_rtok), .r_blk(n2_rblk), .r_data(b2_b),
    .wl_en(wl.en && wl.unit == U_NORM2), .wl_addr(wl.addr), .wl_data(wl.data),
    .o_we(n2_we), .o_tok(n2_tok), .o_col(n2_col), .o_data(n2_data)
  );

  assign o_we   = n2_we;
  assign o_tok  = n2_tok;
  assign o_blk  = BW'(int'(n2_col) / BLK);
  assign o_mask = BLK'(1) << (int'(n2_col) % BLK);
  assign o_data = {BLK{n2_data}};

  // ---------------------------------------------------------------- sequencer
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state  <= S_IDLE;
      st_mha <= 1'b0;
      st_n1  <= 1'b0;
      st_ffn <= 1'b0;
      st_n2  <= 1'b0;
      done   <= 1'b0;
    end else begin
      st_mha <= 1'b0;
      st_n1  <= 1'b0;
      st_ffn <= 1'b0;
      st_n2  <= 1'b0;
      done   <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin st_mha <= 1'b1; state <= S_MHA; end
        S_MHA:  if (dn_mha) begin st_n1  <= 1'b1; state <= S_N1;  end
        S_N1:   if (dn_n1)  begin st_ffn <= 1'b1; state <= S_FFN; end
        S_FFN:  if (dn_ffn) begin st_n2  <= 1'b1; state <= S_N2;  end
        S_N2:   if (dn_n2)  begin done   <= 1'b1; state <= S_IDLE; end
        default: state <= S_IDLE;
      endcase
    end
  end

  // the attention reads queries and keys/values from the same port
  assert property (@(posedge clk) disable iff (!rst_n) (m_kvtok == xa_tok && m_kvblk == xa_blk));

  logic unused;
  assign unused = ^{m_ev, b1_b, b3_b};

endmodule
