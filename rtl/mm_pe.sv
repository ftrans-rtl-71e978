// mm_pe: dense matrix-vector processing element (PE-A / PE-B).
//
// A LANES-wide multiply-accumulate engine. Each clock with in_valid it
// multiplies LANES word pairs, sums the products and adds them to its
// accumulator; in_first restarts the accumulator, in_last closes a dot
// product. One clock after in_last, out_valid is high for one clock with the
// full-precision sum (out_acc) and the sum shifted right by SHIFT with
// rounding and saturated to one word (out_q). A dot product of length K thus
// takes ceil(K / LANES) clocks and back-to-back dot products need no gap.
//
// The paper's two dense PE types differ only in matrix size, so both are
// this one module: the attention units use it for the Q/K/V projections and
// the output linear layer (PE-A) and for Q*K^T and softmax*V (PE-B). The lane
// count and the single-cycle adder tree are this design's choices.
module mm_pe
  import ftrans_pkg::*;
#(
  parameter int LANES = BLK,
  parameter int ACC_W = 40,
  parameter int SHIFT = FRAC
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    in_valid,
  input  logic                    in_first,
  input  logic                    in_last,
  input  word_t                   a [LANES],
  input  word_t                   b [LANES],
  output logic                    out_valid,
  output logic signed [ACC_W-1:0] out_acc,
  output word_t                   out_q
);
  logic signed [ACC_W-1:0] acc, dot;

  always_comb begin
    dot = '0;
    for (int l = 0; l < LANES; l++) dot += ACC_W'(a[l]) * ACC_W'(b[l]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc       <= '0;
      out_valid <= 1'b0;
    end else begin
      out_valid <= in_valid && in_last;
      if (in_valid) acc <= (in_first ? ACC_W'(0) : acc) + dot;
    end
  end

  assign out_acc = acc;
  assign out_q   = round_shift(64'(acc), SHIFT);

endmodule
