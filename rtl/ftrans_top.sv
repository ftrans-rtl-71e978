// ftrans_top: transformer inference accelerator with BCM-compressed
// feed-forward layers.
//
// Data path of one inference:
//   host tokens -> token buffers -> embedding lookup (DDR) -> ebuf[0]
//   -> encoder layer 0 -> ebuf[1] -> ... -> encoder layer N_ENC-1
//   -> ebuf[N_ENC] (encoder-to-decoder buffer)
//   target tokens -> embedding lookup -> dbuf[0] -> decoder layer 0 (self
//   attention on dbuf, cross attention on ebuf[N_ENC]) -> dbuf[1] -> ...
//   -> dbuf[N_DEC] (result)
// Every layer has its own units and weights (dedicated resources for a
// shallow model). The transformer controller sequences the embedding
// lookups and the layers; with enc_only the decoder stack is skipped and the
// result is read from the encoder-to-decoder buffer.
//
// Host side (what the PCIe link would carry): tokens are written with
// tok_we/tok_tgt/tok_idx/tok_id, weights with the wload_t bus (wl.layer =
// 0..N_ENC-1 for encoder layers, N_ENC.. for decoder layers), a run is
// started with start, n_src, n_tgt, enc_only, and the result is read word
// block by block through out_tok/out_blk/out_data after done. The DDR read
// channel (ddr_*) stands in for the DDR controller and holds the embedding
// tables at emb_base_src / emb_base_tgt.
//
// Follows the paper: host / DDR embedding lookup / encoder stack / buffer /
// decoder stack / transformer control structure, 2 + 2 layers of width 200
// with 4 heads. This design's choices: the interfaces, d_ff = 800, the
// maximum sentence length L_MAX = 64, and sequential (not pipelined) layers.
module ftrans_top
  import ftrans_pkg::*;
#(
  parameter int D     = 200,
  parameter int H     = 4,
  parameter int DFF   = 4 * D,
  parameter int L_MAX = 64,
  parameter int N_ENC = 2,
  parameter int N_DEC = 2,
  parameter int ID_W  = 16,
  localparam int NBD = (D + BLK - 1) / BLK
) (
  input  logic                      clk,
  input  logic                      rst_n,
  // command
  input  logic                      start,
  input  logic                      enc_only,
  input  logic [$clog2(L_MAX):0]    n_src,
  input  logic [$clog2(L_MAX):0]    n_tgt,
  output logic                      busy,
  output logic                      done,
  // tokens
  input  logic                      tok_we,
  input  logic                      tok_tgt,
  input  logic [$clog2(L_MAX)-1:0]  tok_idx,
  input  logic [ID_W-1:0]           tok_id,
  // weights
  input  wload_t                    wl,
  // embedding tables in DDR
  input  logic [31:0]               emb_base_src,
  input  logic [31:0]               emb_base_tgt,
  output logic                      ddr_req_valid,
  output logic [31:0]               ddr_req_addr,
  input  logic                      ddr_req_ready,
  input  logic                      ddr_rsp_valid,
  input  logic [BLK*DATA_W-1:0]     ddr_rsp_data,
  // result
  input  logic [$clog2(L_MAX)-1:0]  out_tok,
  input  logic [$clog2(NBD)-1:0]    out_blk,
  output blk_t                      out_data,
  // activity (one pulse per event)
  output logic                      ev_mask,
  output logic                      ev_cross,
  output logic                      ev_fft
);
  localparam int TW  = $clog2(L_MAX);
  localparam int BW  = $clog2(NBD);

  // ---------------------------------------------------------------- run registers and token buffers
  logic [TW:0]     r_src, r_tgt;
  logic [ID_W-1:0] src_tok [L_MAX];
  logic [ID_W-1:0] tgt_tok [L_MAX];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      r_src <= '0;
      r_tgt <= '0;
    end else if (start && !busy) begin
      r_src <= n_src;
      r_tgt <= n_tgt;
    end
  end

  always_ff @(posedge clk) begin
    if (tok_we && !tok_tgt) src_tok[tok_idx] <= tok_id;
    if (tok_we &&  tok_tgt) tgt_tok[tok_idx] <= tok_id;
  end

  // ---------------------------------------------------------------- controller
  logic             emb_start, emb_tgt, emb_done;
  logic [N_ENC-1:0] enc_start, enc_done;
  logic [N_DEC-1:0] dec_start, dec_done;
  logic [$clog2(N_DEC+1)-1:0] cur_dec;

  transformer_ctrl #(.N_ENC(N_ENC), .N_DEC(N_DEC)) u_ctrl (
    .clk, .rst_n, .start(start && !busy), .enc_only, .busy, .done,
    .emb_start, .emb_tgt, .emb_done, .enc_start, .enc_done, .dec_start, .dec_done, .cur_dec
  );

  // ---------------------------------------------------------------- embedding lookup
  logic          e_we;
  logic [TW-1:0] e_tok, e_tidx;
  logic [BW-1:0] e_blk;
  blk_t          e_data;

  embedding_lookup #(.D(D), .L_MAX(L_MAX), .ID_W(ID_W)) u_emb (
    .clk, .rst_n, .start(emb_start), .n_tok(emb_tgt ? r_tgt : r_src),
    .base(emb_tgt ? emb_base_tgt : emb_base_src), .done(emb_done),
    .tok_idx(e_tidx), .tok_id(emb_tgt ? tgt_tok[e_tidx] : src_tok[e_tidx]),
    .ddr_req_valid, .ddr_req_addr, .ddr_req_ready, .ddr_rsp_valid, .ddr_rsp_data,
    .o_we(e_we), .o_tok(e_tok), .o_blk(e_blk), .o_data(e_data)
  );

  // ---------------------------------------------------------------- encoder stack
  logic          eb_we   [N_ENC+1];
  logic [TW-1:0] eb_wtok [N_ENC+1];
  logic [BW-1:0] eb_wblk [N_ENC+1];
  logic [BLK-1:0] eb_wmask [N_ENC+1];
  blk_t          eb_wdata [N_ENC+1];
  logic [TW-1:0] eb_atok [N_ENC+1], eb_btok [N_ENC+1];
  logic [BW-1:0] eb_ablk [N_ENC+1], eb_bblk [N_ENC+1];
  blk_t          eb_a [N_ENC+1], eb_b [N_ENC+1];
  logic [N_ENC-1:0] enc_fft;

  assign eb_we[0]    = e_we && !emb_tgt;
  assign eb_wtok[0]  = e_tok;
  assign eb_wblk[0]  = e_blk;
  assign eb_wmask[0] = '1;
  assign eb_wdata[0] = e_data;

  for (genvar k = 0; k <= N_ENC; k++) begin : g_ebuf
    seq_buf #(.L(L_MAX), .D(D)) u_buf (
      .clk, .we(eb_we[k]), .wtok(eb_wtok[k]), .wblk(eb_wblk[k]), .wmask(eb_wmask[k]), .wdata(eb_wdata[k]),
      .ra_tok(eb_atok[k]), .ra_blk(eb_ablk[k]), .ra_data(eb_a[k]),
      .rb_tok(eb_btok[k]), .rb_blk(eb_bblk[k]), .rb_data(eb_b[k])
    );
  end

  for (genvar k = 0; k < N_ENC; k++) begin : g_enc
    wload_t wl_k;
    always_comb begin
      wl_k    = wl;
      wl_k.en = wl.en && 32'(wl.layer) == k;
    end
    encoder_layer #(.D(D), .H(H), .DFF(DFF), .L_MAX(L_MAX)) u_enc (
      .clk, .rst_n, .start(enc_start[k]), .n_tok(r_src), .done(enc_done[k]),
      .xa_tok(eb_atok[k]), .xa_blk(eb_ablk[k]), .xa_data(eb_a[k]),
      .xb_tok(eb_btok[k]), .xb_blk(eb_bblk[k]), .xb_data(eb_b[k]),
      .wl(wl_k),
      .o_we(eb_we[k+1]), .o_tok(eb_wtok[k+1]), .o_blk(eb_wblk[k+1]), .o_mask(eb_wmask[k+1]),
      .o_data(eb_wdata[k+1]), .ev_fft(enc_fft[k])
    );
  end

  // ---------------------------------------------------------------- decoder stack
  logic          db_we   [N_DEC+1];
  logic [TW-1:0] db_wtok [N_DEC+1];
  logic [BW-1:0] db_wblk [N_DEC+1];
  logic [BLK-1:0] db_wmask [N_DEC+1];
  blk_t          db_wdata [N_DEC+1];
  logic [TW-1:0] db_atok [N_DEC+1], db_btok [N_DEC+1];
  logic [BW-1:0] db_ablk [N_DEC+1], db_bblk [N_DEC+1];
  blk_t          db_a [N_DEC+1], db_b [N_DEC+1];
  logic [TW-1:0] dec_etok [N_DEC];
  logic [BW-1:0] dec_eblk [N_DEC];
  logic [N_DEC-1:0] dec_mask, dec_cross, dec_fft;

  assign db_we[0]    = e_we && emb_tgt;
  assign db_wtok[0]  = e_tok;
  assign db_wblk[0]  = e_blk;
  assign db_wmask[0] = '1;
  assign db_wdata[0] = e_data;

  for (genvar k = 0; k <= N_DEC; k++) begin : g_dbuf
    seq_buf #(.L(L_MAX), .D(D)) u_buf (
      .clk, .we(db_we[k]), .wtok(db_wtok[k]), .wblk(db_wblk[k]), .wmask(db_wmask[k]), .wdata(db_wdata[k]),
      .ra_tok(db_atok[k]), .ra_blk(db_ablk[k]), .ra_data(db_a[k]),
      .rb_tok(db_btok[k]), .rb_blk(db_bblk[k]), .rb_data(db_b[k])
    );
  end

  for (genvar k = 0; k < N_DEC; k++) begin : g_dec
    wload_t wl_k;
    always_comb begin
      wl_k    = wl;
      wl_k.en = wl.en && 32'(wl.layer) == N_ENC + k;
    end
    decoder_layer #(.D(D), .H(H), .DFF(DFF), .L_MAX(L_MAX)) u_dec (
      .clk, .rst_n, .start(dec_start[k]), .n_tok(r_tgt), .n_src(r_src), .done(dec_done[k]),
      .xa_tok(db_atok[k]), .xa_blk(db_ablk[k]), .xa_data(db_a[k]),
      .xb_tok(db_btok[k]), .xb_blk(db_bblk[k]), .xb_data(db_b[k]),
      .enc_tok(dec_etok[k]), .enc_blk(dec_eblk[k]), .enc_data(eb_a[N_ENC]),
      .wl(wl_k),
      .o_we(db_we[k+1]), .o_tok(db_wtok[k+1]), .o_blk(db_wblk[k+1]), .o_mask(db_wmask[k+1]),
      .o_data(db_wdata[k+1]), .ev_mask(dec_mask[k]), .ev_cross(dec_cross[k]), .ev_fft(dec_fft[k])
    );
  end

  // the encoder-to-decoder buffer is read by the running decoder layer;
  // its second port and the last decoder buffer serve the host
  always_comb begin
    eb_atok[N_ENC] = dec_etok[0];
    eb_ablk[N_ENC] = dec_eblk[0];
    for (int k = 0; k < N_DEC; k++)
      if (int'(cur_dec) == k) begin
        eb_atok[N_ENC] = dec_etok[k];
        eb_ablk[N_ENC] = dec_eblk[k];
      end
  end
  assign eb_btok[N_ENC] = out_tok;
  assign eb_bblk[N_ENC] = out_blk;
  assign db_atok[N_DEC] = out_tok;
  assign db_ablk[N_DEC] = out_blk;
  assign db_btok[N_DEC] = '0;
  assign db_bblk[N_DEC] = '0;

  logic out_enc;   // result of the last run comes from the encoder stack
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)              out_enc <= 1'b0;
    else if (start && !busy) out_enc <= enc_only;
  end

  assign out_data = out_enc ? eb_b[N_ENC] : db_a[N_DEC];
  assign ev_mask  = |dec_mask;
  assign ev_cross = |dec_cross;
  assign ev_fft   = |enc_fft || |dec_fft;

  logic unused;
  assign unused = ^{db_b[N_DEC]};

endmodule
