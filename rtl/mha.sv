// mha: multi-head attention unit.
//
// H attention heads (each with its own weights, buffers, PEs and local
// controller) run side by side on the same inputs; their outputs are
// concatenated into the concat buffer (head h fills columns h*DK .. h*DK+DK-1)
// and the output linear layer W^O (D x D, dense) is applied to every token on
// a further matrix-vector PE:  MHA = Concat(Head_1..Head_H) W^O.
//
// The heads share one pair of input read ports. They are started together,
// have identical timing and therefore always address the same token and
// block, so head 0 drives the read addresses for all of them.
//
// Follows the paper's multi-head structure (per-head PE banks and buffers,
// concatenation, output linear layer on a PE-A). This design's choices: the
// shared read ports, running W^O after all heads have finished, and
// D = H * DK being required.
//
// Interface: start (pulse) with n_q, n_kv, mask_en held; done pulses at the
// end. Output words leave on o_* (one word per clock, token o_tok, column
// o_col). Weights arrive on wl (already selected for this unit): mat Q/K/V
// with head = head index, mat FC for W^O (addr = row*D + col).
// Timing: head time (see attention_head) + n_q*D*ceil(D/8) + 2 clocks.
module mha
  import ftrans_pkg::*;
#(
  parameter int D     = 200,
  parameter int H     = 4,
  parameter int DK    = D / H,
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
  output logic [$clog2(L_MAX)-1:0]  xq_tok,
  output logic [$clog2(NBD)-1:0]    xq_blk,
  input  blk_t                      xq_data,
  output logic [$clog2(L_MAX)-1:0]  xkv_tok,
  output logic [$clog2(NBD)-1:0]    xkv_blk,
  input  blk_t                      xkv_data,
  input  wload_t                    wl,
  output logic                      o_we,
  output logic [$clog2(L_MAX)-1:0]  o_tok,
  output logic [$clog2(D)-1:0]      o_col,
  output word_t                     o_data,
  output logic                      ev_mask
);
  localparam int TW  = $clog2(L_MAX);
  localparam int CW  = $clog2(D);

  initial assert (H * DK == D) else $error("mha: D must equal H*DK");

  // ---------------------------------------------------------------- heads
  logic [H-1:0]              h_done, h_busy, h_we, h_mask;
  logic [TW-1:0]             h_tok [H];
  logic [$clog2(DK)-1:0]     h_col [H];
  word_t                     h_data [H];
  logic [TW-1:0]             h_xq_tok [H], h_xkv_tok [H];
  logic [$clog2(NBD)-1:0]    h_xq_blk [H], h_xkv_blk [H];

  for (genvar h = 0; h < H; h++) begin : g_head
    attention_head #(.D(D), .DK(DK), .L_MAX(L_MAX)) u_head (
      .clk, .rst_n, .start, .mask_en, .n_q, .n_kv,
      .done(h_done[h]), .busy(h_busy[h]),
      .xq_tok(h_xq_tok[h]), .xq_blk(h_xq_blk[h]), .xq_data,
      .xkv_tok(h_xkv_tok[h]), .xkv_blk(h_xkv_blk[h]), .xkv_data,
      .wl_en(wl.en && wl.mat != M_FC && 32'(wl.head) == h),
      .wl_mat(wl.mat), .wl_addr(wl.addr), .wl_data(wl.data[15:0]),
      .o_we(h_we[h]), .o_tok(h_tok[h]), .o_col(h_col[h]), .o_data(h_data[h]),
      .ev_mask(h_mask[h])
    );
  end

  assign ev_mask = |h_mask;

  // ---------------------------------------------------------------- concat buffer
  blk_t  cat [L_MAX][NBD];
  word_t wo  [NBD*BLK][D];

  always_ff @(posedge clk) begin
    for (int h = 0; h < H; h++)
      if (h_we[h]) cat[h_tok[h]][(h * DK + int'(h_col[h])) / BLK][(h * DK + int'(h_col[h])) % BLK] <= h_data[h];
    if (wl.en && wl.mat == M_FC && wl.addr < 20'(D*D))
      wo[wl.addr / D][wl.addr % D] <= wl.data[15:0];
  end

  // ---------------------------------------------------------------- output linear layer
  typedef enum logic [1:0] {F_IDLE, F_HEADS, F_FC, F_DRAIN} fstate_t;
  fstate_t fstate;

  logic [TW:0]          t;
  logic [CW:0]          o;
  logic [$clog2(NBD):0] c;
  logic                 fc_last;
  word_t                fa [BLK], fb [BLK];

  assign fc_last = (int'(c) == NBD - 1);

  // heads addressed by head 0 (lockstep), except during W^O
  assign xq_tok  = h_xq_tok[0];
  assign xq_blk  = h_xq_blk[0];
  assign xkv_tok = h_xkv_tok[0];
  assign xkv_blk = h_xkv_blk[0];

  always_comb begin
    for (int l = 0; l < BLK; l++) begin
      int row;
      row   = int'(c) * BLK + l;
      fa[l] = (row < D) ? cat[t[TW-1:0]][c % NBD][l] : '0;
      fb[l] = (row < D && int'(o) < D) ? wo[row % (NBD*BLK)][o % D] : '0;
    end
  end

  logic               fc_ov;
  word_t              fc_q;
  logic signed [39:0] fc_acc;

  mm_pe u_pe_fc (.clk, .rst_n, .in_valid(fstate == F_FC), .in_first(c == 0), .in_last(fc_last),
                 .a(fa), .b(fb), .out_valid(fc_ov), .out_acc(fc_acc), .out_q(fc_q));

  logic [TW:0] t_d;
  logic [CW:0] o_d;
  always_ff @(posedge clk) begin
    t_d <= t;
    o_d <= o;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      o_we   <= 1'b0;
      o_tok  <= '0;
      o_col  <= '0;
      o_data <= '0;
    end else begin
      o_we   <= fc_ov;
      o_tok  <= t_d[TW-1:0];
      o_col  <= o_d[CW-1:0];
      o_data <= fc_q;
    end
  end

  logic [H-1:0] seen;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      fstate <= F_IDLE;
      seen   <= '0;
      t      <= '0;
      o      <= '0;
      c      <= '0;
      done   <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (fstate)
        F_IDLE: if (start) begin
          seen   <= '0;
          fstate <= F_HEADS;
        end
        F_HEADS: begin
          seen <= seen | h_done;
          if ((seen | h_done) == '1) begin
            t      <= '0;
            o      <= '0;
            c      <= '0;
            fstate <= (n_q == 0) ? F_DRAIN : F_FC;
          end
        end
        F_FC: begin
          if (!fc_last) c <= c + 1'b1;
          else begin
            c <= '0;
            if (int'(o) != D - 1) o <= o + 1'b1;
            else begin
              o <= '0;
              if (t != n_q - 1'b1) t <= t + 1'b1;
              else fstate <= F_DRAIN;
            end
          end
        end
        F_DRAIN: begin
          done   <= 1'b1;
          fstate <= F_IDLE;
        end
        default: fstate <= F_IDLE;
      endcase
    end
  end

  logic unused;
  assign unused = ^{fc_acc, h_busy, wl.layer, wl.unit, wl.data[31:16],
                    h_xq_tok[H-1], h_xq_blk[H-1], h_xkv_tok[H-1], h_xkv_blk[H-1]};

endmodule
