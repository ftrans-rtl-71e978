// add_norm: residual addition followed by layer normalisation.
//
// For every token t < n_tok: v = a_t + r_t (saturating, per column), then
//   mean = sum(v) / D,  var = sum((v - mean)^2) / D,  std = sqrt(var),
//   y_c  = gamma_c * (v_c - mean) / std + beta_c.
// The unit reads a (sub-layer output) and r (residual) one block per clock
// through two read ports, keeps the summed row, computes the mean, a second
// pass gives the variance, a bit-serial integer square root (16 clocks)
// gives std in Q8.8, and one divider then produces one output word per
// clock. gamma and beta come from a small parameter memory (reset to 1 and
// 0, loadable as {beta, gamma} at address = column).
//
// The residual connection followed by layer normalisation is the standard
// Transformer sub-layer wrap-up that the accelerator's add/norm unit
// performs; the paper does not describe the unit's insides, so the pass
// structure, the integer square root, the minimum std of 1 LSB (in place of
// an epsilon) and the parameter memory are this design's choices.
//
// Timing per token: 2*ceil(D/8) + 20 clocks plus D clocks of output.
module add_norm
  import ftrans_pkg::*;
#(
  parameter int D     = 200,
  parameter int L_MAX = 64,
  localparam int NBD = (D + BLK - 1) / BLK
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      start,
  input  logic [$clog2(L_MAX):0]    n_tok,
  output logic                      done,
  output logic [$clog2(L_MAX)-1:0]  a_tok,
  output logic [$clog2(NBD)-1:0]    a_blk,
  input  blk_t                      a_data,
  output logic [$clog2(L_MAX)-1:0]  r_tok,
  output logic [$clog2(NBD)-1:0]    r_blk,
  input  blk_t                      r_data,
  input  logic                      wl_en,
  input  logic [19:0]               wl_addr,
  input  logic [31:0]               wl_data,
  output logic                      o_we,
  output logic [$clog2(L_MAX)-1:0]  o_tok,
  output logic [$clog2(D)-1:0]      o_col,
  output word_t                     o_data
);
  localparam int TW  = $clog2(L_MAX);
  localparam int CW  = $clog2(D);

  typedef enum logic [2:0] {S_IDLE, S_SUM, S_MEAN, S_VAR, S_VDIV, S_SQRT, S_OUT} state_t;
  state_t state;

  logic [31:0]          gb [D];        // {beta, gamma}
  blk_t                 row [NBD];
  logic [TW:0]          t;
  logic [$clog2(NBD):0] c;
  logic [CW:0]          col;
  logic signed [31:0]   sum, mean;
  logic signed [47:0]   sq;
  logic [31:0]          var_q16;
  logic [15:0]          root;
  logic [4:0]           bitn;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < D; i++) gb[i] <= {16'sd0, 16'sd256};
    end else if (wl_en && wl_addr < 20'(D)) begin
      gb[wl_addr[CW-1:0]] <= wl_data;
    end
  end

  assign a_tok = t[TW-1:0];
  assign r_tok = t[TW-1:0];
  assign a_blk = c[$clog2(NBD)-1:0];
  assign r_blk = c[$clog2(NBD)-1:0];

  // block sum of a + r, and of squared deviations
  blk_t               vsum;
  logic signed [31:0] bsum;
  logic signed [47:0] bsq;
  always_comb begin
    bsum = '0;
    bsq  = '0;
    for (int l = 0; l < BLK; l++) begin
      logic signed [31:0] dv;
      vsum[l] = sat_word(64'(a_data[l]) + 64'(r_data[l]));
      if (int'(c) * BLK + l < D) bsum += 32'(vsum[l]);
      dv = 32'(row[c % NBD][l]) - mean;
      if (int'(c) * BLK + l < D) bsq += 48'(dv) * 48'(dv);
    end
  end

  // output word
  word_t              v_cur, gamma, beta;
  logic signed [31:0] dev, y;
  logic signed [47:0] z;
  logic [15:0]        std_q8;
  always_comb begin
    v_cur  = row[(int'(col) / BLK) % NBD][int'(col) % BLK];
    gamma  = word_t'(gb[col % D][15:0]);
    beta   = word_t'(gb[col % D][31:16]);
    std_q8 = (root == 0) ? 16'd1 : root;
    dev    = 32'(v_cur) - mean;
    y      = (dev <<< FRAC) / $signed({16'd0, std_q8});
    z      = ((48'(y) * 48'(gamma)) >>> FRAC) + 48'(beta);
  end

  // trial bit of the square root
  logic [15:0] trial;
  logic [31:0] trial_sq;
  assign trial    = root | (16'd1 << bitn[3:0]);
  assign trial_sq = 32'(trial) * 32'(trial);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      t       <= '0;
      c       <= '0;
      col     <= '0;
      sum     <= '0;
      mean    <= '0;
      sq      <= '0;
      var_q16 <= '0;
      root    <= '0;
      bitn    <= '0;
      done    <= 1'b0;
      o_we    <= 1'b0;
      o_tok   <= '0;
      o_col   <= '0;
      o_data  <= '0;
    end else begin
      done <= 1'b0;
      o_we <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          t     <= '0;
          c     <= '0;
          sum   <= '0;
          state <= (n_tok == 0) ? S_IDLE : S_SUM;
          done  <= (n_tok == 0);
        end
        S_SUM: begin
          row[c % NBD] <= vsum;
          sum          <= sum + bsum;
          if (int'(c) == NBD - 1) state <= S_MEAN;
          else c <= c + 1'b1;
        end
        S_MEAN: begin
          mean  <= sum / D;
          c     <= '0;
          sq    <= '0;
          state <= S_VAR;
        end
        S_VAR: begin
          sq <= sq + bsq;
          if (int'(c) == NBD - 1) state <= S_VDIV;
          else c <= c + 1'b1;
        end
        S_VDIV: begin
          var_q16 <= (sq / D > 48'sh0_FFFF_FFFF) ? 32'hFFFF_FFFF : 32'(sq / D);
          root    <= '0;
          bitn    <= 5'd15;
          state   <= S_SQRT;
        end
        S_SQRT: begin
          if (trial_sq <= var_q16) root <= trial;
          if (bitn == 0) begin
            col   <= '0;
            state <= S_OUT;
          end else begin
            bitn <= bitn - 1'b1;
          end
        end
        S_OUT: begin
          o_we   <= 1'b1;
          o_tok  <= t[TW-1:0];
          o_col  <= col[CW-1:0];
          o_data <= sat_word(64'(z));
          if (int'(col) == D - 1) begin
            c   <= '0;
            sum <= '0;
            if (t == n_tok - 1'b1) begin
              done  <= 1'b1;
              state <= S_IDLE;
            end else begin
              t     <= t + 1'b1;
              state <= S_SUM;
            end
          end else begin
            col <= col + 1'b1;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  logic unused;
  assign unused = ^{wl_addr[19:CW]};

endmodule
