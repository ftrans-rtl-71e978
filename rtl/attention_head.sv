// attention_head: one head of (masked) scaled dot-product attention.
//
// Computes Head = softmax(mask((X_q W^Q)(X_kv W^K)^T / sqrt(DK))) (X_kv W^V)
// for n_q query tokens and n_kv key/value tokens. The head holds its own
// projection weights (BRAM Q, BRAM K, BRAM V, each D x DK), three projection
// PEs, the Q, K and V buffers, a PE for Q*K^T, the scaling unit, the mask
// multiplexer, a softmax unit, a PE for softmax * V, and the local
// controller that sequences them:
//
//   PROJ   all three projections run side by side on their PEs, one output
//          word per ceil(D/8) clocks, into the Q/K/V buffers;
//   SCORE  for query row t, the dot products q_t . k_s for s < n_kv are
//          formed, scaled by 1/sqrt(DK), and passed through the mask
//          multiplexer, which replaces the score of a future token (s > t,
//          when mask_en is set) by 0 and marks it as masked so the softmax
//          gives it zero weight;
//   SMAX   the softmax row is completed into the probability buffer;
//   AV     output word o of row t is the dot product of the probability row
//          with column o of V, and is sent out on the o_* write stream.
//
// Follows the paper's head: weight BRAMs -> PE banks -> K/Q/V buffers ->
// PE bank -> Norm (divide by sqrt(DK)) -> mask multiplexer with a 0 input ->
// softmax -> PE bank with the V buffer, under a per-head controller. This
// design's choices: the phase-by-phase schedule (rows are not overlapped),
// the masked-position flag that goes with the 0, Q8.8 arithmetic, and
// combinational buffer reads.
//
// Interface: start (pulse) with n_q, n_kv, mask_en held; done pulses at the
// end. The head reads its inputs through two block read ports (xq_*, xkv_*)
// that it addresses with the same token and block counters in PROJ.
// Timing: max(n_q,n_kv)*DK*ceil(D/8) + 2 clocks of PROJ, then per query row
// n_kv*ceil(DK/8) + 1 (scores) + n_kv + 1 (exp) + n_kv (div) + about 2, and
// DK*ceil(n_kv/8) + 2 (AV); done follows the last output word.
module attention_head
  import ftrans_pkg::*;
#(
  parameter int D     = 200,
  parameter int DK    = 50,
  parameter int L_MAX = 64,
  localparam int NBD = (D + BLK - 1) / BLK
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      start,
  input  logic                      mask_en,
  input  logic [$clog2(L_MAX):0]    n_q,
  input  logic [$clog2(L_MAX):0]    n_kv,
  output logic                      done,
  output logic                      busy,
  // input read ports
  output logic [$clog2(L_MAX)-1:0]  xq_tok,
  output logic [$clog2(NBD)-1:0]    xq_blk,
  input  blk_t                      xq_data,
  output logic [$clog2(L_MAX)-1:0]  xkv_tok,
  output logic [$clog2(NBD)-1:0]    xkv_blk,
  input  blk_t                      xkv_data,
  // weight load (already selected for this head)
  input  logic                      wl_en,
  input  logic [1:0]                wl_mat,
  input  logic [19:0]               wl_addr,
  input  word_t                     wl_data,
  // head output stream
  output logic                      o_we,
  output logic [$clog2(L_MAX)-1:0]  o_tok,
  output logic [$clog2(DK)-1:0]     o_col,
  output word_t                     o_data,
  // one pulse per masked score (observability)
  output logic                      ev_mask
);
  localparam int NBK = (DK + BLK - 1) / BLK;
  localparam int NBL = (L_MAX + BLK - 1) / BLK;
  localparam int TW  = $clog2(L_MAX);
  localparam int OW  = $clog2(DK);
  // 1/sqrt(DK) in Q1.15
  localparam logic signed [16:0] INV_SQRT_DK = 17'($rtoi(32768.0 / $sqrt(real'(DK)) + 0.5));

  // ---------------------------------------------------------------- memories
  word_t wq [NBD*BLK][DK];
  word_t wk [NBD*BLK][DK];
  word_t wv [NBD*BLK][DK];
  blk_t  qbuf [L_MAX][NBK];
  blk_t  kbuf [L_MAX][NBK];
  word_t vbuf [NBL*BLK][DK];
  word_t pbuf [NBL*BLK];

  always_ff @(posedge clk) begin
    if (wl_en && wl_addr < 20'(D*DK)) begin
      unique case (wl_mat)
        M_Q:     wq[wl_addr / DK][wl_addr % DK] <= wl_data;
        M_K:     wk[wl_addr / DK][wl_addr % DK] <= wl_data;
        M_V:     wv[wl_addr / DK][wl_addr % DK] <= wl_data;
        default: ;
      endcase
    end
  end

  // ---------------------------------------------------------------- control
  typedef enum logic [2:0] {S_IDLE, S_PROJ, S_PDRAIN, S_SCORE, S_SMAX, S_AV, S_AVDRAIN, S_FIN} state_t;
  state_t state;

  logic [TW:0]          t, s, n_proj;
  logic [OW:0]          o;
  logic [$clog2(NBD):0] c;
  logic [TW:0]          nbl_kv;    // ceil(n_kv / BLK)

  assign n_proj = (n_q > n_kv) ? n_q : n_kv;
  assign nbl_kv = (TW+1)'((int'(n_kv) + BLK - 1) / BLK);
  assign busy   = (state != S_IDLE);

  // ---------------------------------------------------------------- PE operands
  word_t pa_q [BLK], pa_kv [BLK], pb_q [BLK], pb_k [BLK], pb_v [BLK];
  word_t sa [BLK], sb [BLK], va [BLK], vb [BLK];
  logic  feed_proj, feed_score, feed_av;
  logic  proj_first, proj_last, score_first, score_last, av_first, av_last;

  assign xq_tok  = t[TW-1:0];
  assign xkv_tok = t[TW-1:0];
  assign xq_blk  = c[$clog2(NBD)-1:0];
  assign xkv_blk = c[$clog2(NBD)-1:0];

  always_comb begin
    for (int l = 0; l < BLK; l++) begin
      int row;
      row      = int'(c) * BLK + l;
      pa_q[l]  = xq_data[l];
      pa_kv[l] = xkv_data[l];
      pb_q[l]  = (row < D && int'(o) < DK) ? wq[row % (NBD*BLK)][o[OW-1:0]] : '0;
      pb_k[l]  = (row < D && int'(o) < DK) ? wk[row % (NBD*BLK)][o[OW-1:0]] : '0;
      pb_v[l]  = (row < D && int'(o) < DK) ? wv[row % (NBD*BLK)][o[OW-1:0]] : '0;
      // scores: q_t . k_s over block c of DK
      sa[l]    = (row < DK) ? qbuf[t[TW-1:0]][c % NBK][l] : '0;
      sb[l]    = (row < DK) ? kbuf[s[TW-1:0]][c % NBK][l] : '0;
      // AV: p_t . V[:, o] over block c of the key positions
      va[l]    = (row < int'(n_kv)) ? pbuf[row % (NBL*BLK)] : '0;
      vb[l]    = (row < int'(n_kv) && int'(o) < DK) ? vbuf[row % (NBL*BLK)][o[OW-1:0]] : '0;
    end
  end

  assign feed_proj   = (state == S_PROJ);
  assign feed_score  = (state == S_SCORE);
  assign feed_av     = (state == S_AV);
  assign proj_first  = (c == 0);
  assign proj_last   = (int'(c) == NBD - 1);
  assign score_first = (c == 0);
  assign score_last  = (int'(c) == NBK - 1);
  assign av_first    = (c == 0);
  assign av_last     = (c == nbl_kv - 1'b1);

  // ---------------------------------------------------------------- PE banks
  logic  q_ov, k_ov, v_ov, sc_ov, av_ov;
  word_t q_q, k_q, v_q, sc_q, av_q;
  logic signed [39:0] q_acc, k_acc, v_acc, sc_acc, av_acc;

  mm_pe u_pe_q (.clk, .rst_n, .in_valid(feed_proj && t < n_q),  .in_first(proj_first), .in_last(proj_last),
                .a(pa_q),  .b(pb_q), .out_valid(q_ov), .out_acc(q_acc), .out_q(q_q));
  mm_pe u_pe_k (.clk, .rst_n, .in_valid(feed_proj && t < n_kv), .in_first(proj_first), .in_last(proj_last),
                .a(pa_kv), .b(pb_k), .out_valid(k_ov), .out_acc(k_acc), .out_q(k_q));
  mm_pe u_pe_v (.clk, .rst_n, .in_valid(feed_proj && t < n_kv), .in_first(proj_first), .in_last(proj_last),
                .a(pa_kv), .b(pb_v), .out_valid(v_ov), .out_acc(v_acc), .out_q(v_q));
  mm_pe u_pe_s (.clk, .rst_n, .in_valid(feed_score), .in_first(score_first), .in_last(score_last),
                .a(sa), .b(sb), .out_valid(sc_ov), .out_acc(sc_acc), .out_q(sc_q));
  mm_pe u_pe_o (.clk, .rst_n, .in_valid(feed_av), .in_first(av_first), .in_last(av_last),
                .a(va), .b(vb), .out_valid(av_ov), .out_acc(av_acc), .out_q(av_q));

  // tags of the dot product that closes this clock (PE latency is 1)
  logic [TW:0] t_d, s_d;
  logic [OW:0] o_d;
  always_ff @(posedge clk) begin
    t_d <= t;
    s_d <= s;
    o_d <= o;
  end

  // projection results into the buffers
  always_ff @(posedge clk) begin
    if (q_ov) qbuf[t_d[TW-1:0]][int'(o_d) / BLK][int'(o_d) % BLK] <= q_q;
    if (k_ov) kbuf[t_d[TW-1:0]][int'(o_d) / BLK][int'(o_d) % BLK] <= k_q;
    if (v_ov) vbuf[t_d[TW-1:0]][o_d[OW-1:0]] <= v_q;
  end

  // ---------------------------------------------------------------- Norm, mask, softmax
  logic signed [32:0] scaled;
  word_t              norm_q, mux_q;
  logic               masked;
  logic               sm_ready, sm_ov, sm_last;
  logic [TW-1:0]      sm_idx;
  word_t              sm_p;

  always_comb begin
    scaled = 33'(sc_q) * 33'(INV_SQRT_DK);
    norm_q = round_shift(64'(scaled), 15);
    masked = mask_en && (s_d > t_d);
    mux_q  = masked ? '0 : norm_q;
  end

  assign ev_mask = sc_ov && masked;

  softmax_unit #(.L_MAX(L_MAX)) u_softmax (
    .clk, .rst_n,
    .in_valid(sc_ov), .in_keep(!masked), .in_last(s_d == n_kv - 1'b1), .in_x(mux_q),
    .in_ready(sm_ready),
    .out_valid(sm_ov), .out_last(sm_last), .out_idx(sm_idx), .out_p(sm_p)
  );

  always_ff @(posedge clk) if (sm_ov) pbuf[sm_idx] <= sm_p;

  // ---------------------------------------------------------------- output
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      o_we   <= 1'b0;
      o_tok  <= '0;
      o_col  <= '0;
      o_data <= '0;
    end else begin
      o_we   <= av_ov;
      o_tok  <= t_d[TW-1:0];
      o_col  <= o_d[OW-1:0];
      o_data <= av_q;
    end
  end

  // ---------------------------------------------------------------- sequencer
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      t     <= '0;
      s     <= '0;
      o     <= '0;
      c     <= '0;
      done  <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          t     <= '0;
          s     <= '0;
          o     <= '0;
          c     <= '0;
          state <= (n_proj == 0) ? S_AVDRAIN : S_PROJ;
        end
        S_PROJ: begin
          if (!proj_last) c <= c + 1'b1;
          else begin
            c <= '0;
            if (int'(o) != DK - 1) o <= o + 1'b1;
            else begin
              o <= '0;
              if (t != n_proj - 1'b1) t <= t + 1'b1;
              else state <= S_PDRAIN;
            end
          end
        end
        S_PDRAIN: begin
          t     <= '0;
          s     <= '0;
          state <= (n_q == 0 || n_kv == 0) ? S_AVDRAIN : S_SCORE;
        end
        S_SCORE: begin
          if (!score_last) c <= c + 1'b1;
          else begin
            c <= '0;
            if (s != n_kv - 1'b1) s <= s + 1'b1;
            else state <= S_SMAX;
          end
        end
        S_SMAX: if (sm_ov && sm_last) begin
          o     <= '0;
          c     <= '0;
          state <= S_AV;
        end
        S_AV: begin
          if (!av_last) c <= c + 1'b1;
          else begin
            c <= '0;
            if (int'(o) != DK - 1) o <= o + 1'b1;
            else state <= S_AVDRAIN;
          end
        end
        S_AVDRAIN: begin
          // let the last AV result leave, then the next row or the end
          s <= '0;
          o <= '0;
          if (n_q != 0 && n_kv != 0 && t != n_q - 1'b1) begin
            t     <= t + 1'b1;
            state <= S_SCORE;
          end else begin
            state <= S_FIN;
          end
        end
        S_FIN: begin
          // the last output word is written this clock
          done  <= 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // the softmax is always idle when a row of scores starts
  assert property (@(posedge clk) disable iff (!rst_n) sc_ov |-> sm_ready);

  logic unused;
  assign unused = ^{q_acc, k_acc, v_acc, sc_acc, av_acc};

endmodule
