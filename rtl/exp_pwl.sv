// exp_pwl: piece-wise linear approximation of exp(-x) for the softmax.
//
// x is an unsigned Q8.8 value (x >= 0). The range [0, 8) is cut into 16
// segments of width 0.5; on each segment the output is the chord between
// the exact values at the two ends, so the error is largest mid-segment
// (about 2.5% of full scale at x = 0.25) and zero at the breakpoints. For
// x >= 8 the output is 0. The result is unsigned Q1.15: 32768 stands for 1.0.
//
// The use of piece-wise linear segments for the exponential follows the
// paper; the segment count, width, range and number formats are this
// design's choices. The breakpoint table is computed at elaboration:
// E[k] = round(32768 * exp(-k/2)), k = 0..16.
//
// Timing: purely combinational.
module exp_pwl (
  input  logic [15:0] x,   // Q8.8, non-negative
  output logic [15:0] y    // Q1.15, exp(-x)
);
  typedef logic [15:0] tab_t [17];

  function automatic tab_t mk_tab();
    tab_t t;
    for (int k = 0; k <= 16; k++) t[k] = 16'($rtoi(32768.0 * $exp(-k / 2.0) + 0.5));
    return t;
  endfunction

  localparam tab_t E = mk_tab();

  logic [8:0]  seg;    // x / 0.5
  logic [6:0]  frac;   // position inside the segment, 1/128 steps
  logic [15:0] e0, e1;
  logic [22:0] drop;

  always_comb begin
    seg  = x[15:7];
    frac = x[6:0];
    e0   = '0;
    e1   = '0;
    drop = '0;
    if (seg >= 9'd16) begin
      y = '0;
    end else begin
      e0   = E[seg[3:0]];
      e1   = E[5'(seg[3:0]) + 5'd1];
      drop = (23'(e0 - e1) * 23'(frac)) >> 7;
      y    = e0 - drop[15:0];
    end
  end

endmodule
