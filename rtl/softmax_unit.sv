// softmax_unit: row softmax with a piece-wise linear exponential.
//
// Computes p_i = exp(x_i) / sum_j exp(x_j) over one row of up to L_MAX
// scores in three passes:
//   1. COLLECT: scores stream in (in_valid, one per clock) and are stored;
//      the largest kept score is tracked. in_keep = 0 marks a masked
//      position: it is stored but takes no part in max or sum.
//   2. EXP: each stored score becomes e_i = exp(-(max - x_i)) through the
//      piece-wise linear exp(-x) unit; e_i goes to the exponent buffer and
//      into the accumulator. Masked positions get e_i = 0.
//   3. DIV: each e_i is divided by the accumulated sum and streamed out as a
//      Q8.8 probability (out_valid, out_idx, out_last on the final one).
// Subtracting the row maximum keeps the argument of exp(-x) non-negative and
// the exponents at most 1.0, so no overflow is possible.
//
// The exp(-x) -> buffer + accumulator -> divider structure follows the
// paper's softmax module. The max subtraction, the masking input and the
// pass-by-pass sequencing are this design's choices.
//
// Timing: in_ready is high only in COLLECT. After the in_last score, the row
// takes n clocks of EXP; the first probability leaves n + 2 clocks after the
// last score, then one probability per clock for n clocks.
module softmax_unit
  import ftrans_pkg::*;
#(
  parameter int L_MAX = 64
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       in_valid,
  input  logic                       in_keep,
  input  logic                       in_last,
  input  word_t                      in_x,
  output logic                       in_ready,
  output logic                       out_valid,
  output logic                       out_last,
  output logic [$clog2(L_MAX)-1:0]   out_idx,
  output word_t                      out_p
);
  localparam int IW = $clog2(L_MAX);

  typedef enum logic [1:0] {S_COLLECT, S_EXP, S_DIV} state_t;
  state_t state;

  word_t            xbuf [L_MAX];
  logic             kbuf [L_MAX];
  logic [15:0]      ebuf [L_MAX];
  word_t            xmax;
  logic             any_kept;
  logic [IW:0]      n, idx;
  logic [IW+16:0]   sum;

  // exponent of the current entry
  logic signed [16:0] diff;
  logic [15:0]        ex_arg, ex_y;
  always_comb begin
    diff   = 17'(xmax) - 17'(xbuf[idx[IW-1:0]]);
    ex_arg = (diff > 17'sd65535) ? 16'hffff : diff[15:0];
  end
  exp_pwl u_exp (.x(ex_arg), .y(ex_y));

  // division of the current exponent by the sum, result Q8.8
  logic [IW+24:0] quot;
  always_comb quot = (sum == '0) ? '0 : ({(IW+9)'(0), ebuf[idx[IW-1:0]]} << 8) / (IW+25)'(sum);

  assign in_ready = (state == S_COLLECT);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_COLLECT;
      n         <= '0;
      idx       <= '0;
      xmax      <= '0;
      any_kept  <= 1'b0;
      sum       <= '0;
      out_valid <= 1'b0;
      out_last  <= 1'b0;
      out_idx   <= '0;
      out_p     <= '0;
    end else begin
      out_valid <= 1'b0;
      out_last  <= 1'b0;
      unique case (state)
        S_COLLECT: if (in_valid) begin
          xbuf[n[IW-1:0]] <= in_x;
          kbuf[n[IW-1:0]] <= in_keep;
          if (in_keep && (!any_kept || in_x > xmax)) xmax <= in_x;
          if (in_keep) any_kept <= 1'b1;
          n <= n + 1'b1;               // ends as the row length
          if (in_last) begin
            idx   <= '0;
            sum   <= '0;
            state <= S_EXP;
          end
        end
        S_EXP: begin
          ebuf[idx[IW-1:0]] <= kbuf[idx[IW-1:0]] ? ex_y : 16'd0;
          if (kbuf[idx[IW-1:0]]) sum <= sum + (IW+17)'(ex_y);
          if (idx == n - 1'b1) begin
            idx   <= '0;
            state <= S_DIV;
          end else begin
            idx <= idx + 1'b1;
          end
        end
        S_DIV: begin
          out_valid <= 1'b1;
          out_idx   <= idx[IW-1:0];
          out_p     <= word_t'(quot > (IW+25)'(32767) ? 32767 : quot);
          if (idx == n - 1'b1) begin
            out_last <= 1'b1;
            n        <= '0;
            any_kept <= 1'b0;
            state    <= S_COLLECT;
          end else begin
            idx <= idx + 1'b1;
          end
        end
        default: state <= S_COLLECT;
      endcase
    end
  end

endmodule
