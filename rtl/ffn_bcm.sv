// ffn_bcm: point-wise feed-forward network on two BCM FFT/IFFT PEs.
//
// FFN(x) = W2 * ReLU(W1 * x) for every token, with W1 (DFF x D) and W2
// (D x DFF) block-circulant with block size BLK. The first layer runs on PE
// FFT-IFFT 1 and fills an intermediate buffer (n_tok x DFF); the second layer
// then runs on PE FFT-IFFT 2 and streams its output blocks out.
//
// For each layer the controller walks token t, output block i and input
// block j, feeding one input block per clock to the PE; block i of token t
// leaves the PE 2*log2(BLK)+1 clocks after its last input block, tagged with
// (t, i). A layer is finished when all n_tok * (output blocks) results have
// come back.
//
// Two FFT/IFFT PEs in sequence (stages 6 and 7 of the layer schedule) follow
// the paper. The inner width DFF = 4*D and the ReLU between the layers are
// the standard Transformer choices, assumed here because the paper does not
// give them; running the two layers one after the other (not overlapped) is
// this design's choice. D and DFF must be multiples of BLK.
//
// Timing: n_tok*(DFF/8)*(D/8) + n_tok*(D/8)*(DFF/8) clocks plus two PE
// latencies and 2 clocks.
module ffn_bcm
  import ftrans_pkg::*;
#(
  parameter int D     = 200,
  parameter int DFF   = 4 * D,
  parameter int L_MAX = 64,
  localparam int NB1 = D / BLK
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      start,
  input  logic [$clog2(L_MAX):0]    n_tok,
  output logic                      done,
  output logic [$clog2(L_MAX)-1:0]  x_tok,
  output logic [$clog2(NB1)-1:0]    x_blk,
  input  blk_t                      x_data,
  input  logic                      wl1_en,
  input  logic                      wl2_en,
  input  logic [19:0]               wl_addr,
  input  logic [31:0]               wl_data,
  output logic                      o_we,
  output logic [$clog2(L_MAX)-1:0]  o_tok,
  output logic [$clog2(NB1)-1:0]    o_blk,
  output blk_t                      o_data,
  output logic                      ev_fft     // one pulse per PE output block
);     // blocks of the model width
  localparam int NB2 = DFF / BLK;   // blocks of the inner width
  localparam int TW  = $clog2(L_MAX);
  localparam int BW  = $clog2(NB2 + 1);
  localparam int TAGW = 16;

  initial assert (D % BLK == 0 && DFF % BLK == 0) else $error("ffn_bcm: D and DFF must be multiples of BLK");

  typedef enum logic [2:0] {S_IDLE, S_L1, S_W1, S_L2, S_W2} state_t;
  state_t state;

  logic [TW:0]  t;
  logic [BW:0]  i, j;
  logic [31:0]  outs;
  logic [31:0]  n_out1, n_out2;

  assign n_out1 = 32'(n_tok) * NB2;
  assign n_out2 = 32'(n_tok) * NB1;

  // ---------------------------------------------------------------- intermediate buffer
  logic                   h_we;
  logic [TW-1:0]          h_wtok, h_rtok;
  logic [$clog2(NB2)-1:0] h_wblk, h_rblk;
  blk_t                   h_wdata, h_rdata, h_unused;

  seq_buf #(.L(L_MAX), .D(DFF)) u_hbuf (
    .clk, .we(h_we), .wtok(h_wtok), .wblk(h_wblk), .wmask('1), .wdata(h_wdata),
    .ra_tok(h_rtok), .ra_blk(h_rblk), .ra_data(h_rdata),
    .rb_tok('0), .rb_blk('0), .rb_data(h_unused)
  );

  assign x_tok  = t[TW-1:0];
  assign x_blk  = ($clog2(NB1))'(j);
  assign h_rtok = t[TW-1:0];
  assign h_rblk = ($clog2(NB2))'(j);

  // ---------------------------------------------------------------- PEs
  logic               l1_feed, l2_feed, l1_last, l2_last;
  word_t              x1 [BLK], x2 [BLK], y1 [BLK], y2 [BLK];
  logic               v1, v2;
  logic [TAGW-1:0]    tag1, tag2, tag_in;

  assign l1_feed = (state == S_L1);
  assign l2_feed = (state == S_L2);
  assign l1_last = (int'(j) == NB1 - 1);
  assign l2_last = (int'(j) == NB2 - 1);
  assign tag_in  = {8'(t), 8'(i)};

  always_comb
    for (int l = 0; l < BLK; l++) begin
      x1[l] = x_data[l];
      x2[l] = h_rdata[l];
    end

  bcm_pe #(.N(BLK), .F(NB2), .G(NB1), .TAG_W(TAGW)) u_pe1 (
    .clk, .rst_n,
    .in_valid(l1_feed), .in_first(j == 0), .in_last(l1_last),
    .in_row(($clog2(NB2+1))'(i)), .in_col(($clog2(NB1+1))'(j)), .in_tag(tag_in), .in_x(x1),
    .wl_en(wl1_en), .wl_addr, .wl_data,
    .out_valid(v1), .out_tag(tag1), .out_y(y1)
  );

  bcm_pe #(.N(BLK), .F(NB1), .G(NB2), .TAG_W(TAGW)) u_pe2 (
    .clk, .rst_n,
    .in_valid(l2_feed), .in_first(j == 0), .in_last(l2_last),
    .in_row(($clog2(NB1+1))'(i)), .in_col(($clog2(NB2+1))'(j)), .in_tag(tag_in), .in_x(x2),
    .wl_en(wl2_en), .wl_addr, .wl_data,
    .out_valid(v2), .out_tag(tag2), .out_y(y2)
  );

  // layer 1 results, through ReLU, into the intermediate buffer
  always_comb begin
    h_we   = v1;
    h_wtok = TW'(tag1[15:8]);
    h_wblk = ($clog2(NB2))'(tag1[7:0]);
    for (int l = 0; l < BLK; l++) h_wdata[l] = y1[l][DATA_W-1] ? '0 : y1[l];
  end

  // layer 2 results out
  always_comb begin
    o_we   = v2;
    o_tok  = TW'(tag2[15:8]);
    o_blk  = ($clog2(NB1))'(tag2[7:0]);
    for (int l = 0; l < BLK; l++) o_data[l] = y2[l];
  end

  assign ev_fft = v1 || v2;

  // ---------------------------------------------------------------- sequencer
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      t     <= '0;
      i     <= '0;
      j     <= '0;
      outs  <= '0;
      done  <= 1'b0;
    end else begin
      done <= 1'b0;
      if (v1 || v2) outs <= outs + 1;
      unique case (state)
        S_IDLE: if (start) begin
          t     <= '0;
          i     <= '0;
          j     <= '0;
          outs  <= '0;
          if (n_tok == 0) done <= 1'b1;
          else state <= S_L1;
        end
        S_L1: begin
          if (!l1_last) j <= j + 1'b1;
          else begin
            j <= '0;
            if (int'(i) != NB2 - 1) i <= i + 1'b1;
            else begin
              i <= '0;
              if (t != n_tok - 1'b1) t <= t + 1'b1;
              else state <= S_W1;
            end
          end
        end
        S_W1: if (outs == n_out1) begin
          outs  <= '0;
          t     <= '0;
          state <= S_L2;
        end
        S_L2: begin
          if (!l2_last) j <= j + 1'b1;
          else begin
            j <= '0;
            if (int'(i) != NB1 - 1) i <= i + 1'b1;
            else begin
              i <= '0;
              if (t != n_tok - 1'b1) t <= t + 1'b1;
              else state <= S_W2;
            end
          end
        end
        S_W2: if (outs == n_out2) begin
          done  <= 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  logic unused;
  assign unused = ^{h_unused};

endmodule
