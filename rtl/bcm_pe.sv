// bcm_pe: FFT/IFFT processing element for block-circulant (BCM) layers.
//
// A BCM weight matrix is cut into F x G circulant blocks of size N; block
// (i, j) is fully described by its index vector p_ij, and the product
// W_ij * x_j is the circular convolution p_ij (*) x_j =
// IFFT(FFT(p_ij) o FFT(x_j)). Output block i is y_i = sum_j W_ij * x_j.
//
// The PE is the three-part pipeline FFT -> MAC -> IFFT. Input blocks x_j of
// one output row i stream in one per clock (in_first marks j = 0, in_last
// j = G-1). The FFT kernel transforms each block; the MAC multiplies the
// spectrum element by element with FFT(p_ij), read from the weight memory
// (the PE's "BRAM FFT(W)"), and adds it into N frequency-bin accumulators.
// Because the IFFT is linear, the sum over j is done in the frequency domain
// and only one IFFT is needed per output block. When the last block of a row
// has been accumulated, the accumulators go through the inverse kernel and
// the real part, saturated to 16 bits, is the output block. A tag given with
// the last input block comes out with that output block.
//
// Follows the paper: FFT -> MAC with FFT(W) from BRAM -> IFFT, radix-2,
// compute cost O(N log N) per block. This design's choices: the frequency-
// domain accumulation, the weight format (FFT(p_ij) precomputed off-chip,
// 16-bit Re and Im in Q8.8, all N bins stored), combinational weight read,
// and the internal widths WF (forward) and WI (accumulator / inverse).
//
// Timing: a row of G input blocks takes G clocks; a new row may follow at
// once. out_valid rises 2*log2(N) + 1 clocks after the in_last block.
module bcm_pe
  import ftrans_pkg::*;
#(
  parameter int N     = BLK,
  parameter int F     = 100,
  parameter int G     = 25,
  parameter int TAG_W = 16,
  parameter int WF    = 24,
  parameter int WI    = 40
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // input block stream
  input  logic                     in_valid,
  input  logic                     in_first,
  input  logic                     in_last,
  input  logic [$clog2(F+1)-1:0]   in_row,
  input  logic [$clog2(G+1)-1:0]   in_col,
  input  logic [TAG_W-1:0]         in_tag,
  input  word_t                    in_x [N],
  // weight load: FFT(p_ij)[k] at address (i*G + j)*N + k, data {Im, Re}
  input  logic                     wl_en,
  input  logic [19:0]              wl_addr,
  input  logic [31:0]              wl_data,
  // output block stream
  output logic                     out_valid,
  output logic [TAG_W-1:0]         out_tag,
  output word_t                    out_y [N]
);
  localparam int S = $clog2(N);

  // ---------------- weight memory: FFT(p_ij), one row of N bins per block
  logic [31:0] wmem [F*G][N];

  always_ff @(posedge clk) begin
    if (wl_en && wl_addr < 20'(F*G*N))
      wmem[wl_addr / N][wl_addr % N] <= wl_data;
  end

  // ---------------- forward FFT of the input block
  logic signed [WF-1:0] f_in_re [N], f_in_im [N], f_re [N], f_im [N];
  logic                 f_valid;

  always_comb
    for (int k = 0; k < N; k++) begin
      f_in_re[k] = WF'(in_x[k]);
      f_in_im[k] = '0;
    end

  fft_kernel #(.N(N), .W(WF), .INVERSE(1'b0)) u_fft (
    .clk, .rst_n, .in_valid,
    .in_re(f_in_re), .in_im(f_in_im),
    .out_valid(f_valid), .out_re(f_re), .out_im(f_im)
  );

  // side-band control delayed by the FFT latency
  typedef struct packed {
    logic                   first;
    logic                   last;
    logic [$clog2(F*G+1)-1:0] waddr;
    logic [TAG_W-1:0]       tag;
  } side_t;

  side_t side_d [S+1];
  always_comb begin
    side_d[0].first = in_first;
    side_d[0].last  = in_last;
    side_d[0].waddr = ($clog2(F*G+1))'(in_row * G + in_col);
    side_d[0].tag   = in_tag;
  end
  for (genvar s = 0; s < S; s++) begin : g_side
    always_ff @(posedge clk) side_d[s+1] <= side_d[s];
  end

  // ---------------- MAC: frequency-domain multiply and accumulate
  logic signed [WI-1:0] acc_re [N], acc_im [N];
  logic                 acc_done;
  logic [TAG_W-1:0]     acc_tag;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc_done <= 1'b0;
      acc_tag  <= '0;
      for (int k = 0; k < N; k++) begin
        acc_re[k] <= '0;
        acc_im[k] <= '0;
      end
    end else begin
      acc_done <= f_valid && side_d[S].last;
      if (f_valid) begin
        if (side_d[S].last) acc_tag <= side_d[S].tag;
        for (int k = 0; k < N; k++) begin
          logic signed [15:0]   w_re, w_im;
          logic signed [WI+15:0] p_re, p_im;
          w_re = wmem[side_d[S].waddr][k][15:0];
          w_im = wmem[side_d[S].waddr][k][31:16];
          p_re = (f_re[k] * w_re - f_im[k] * w_im) >>> FRAC;
          p_im = (f_re[k] * w_im + f_im[k] * w_re) >>> FRAC;
          acc_re[k] <= (side_d[S].first ? WI'(0) : acc_re[k]) + WI'(p_re);
          acc_im[k] <= (side_d[S].first ? WI'(0) : acc_im[k]) + WI'(p_im);
        end
      end
    end
  end

  // ---------------- inverse FFT of the accumulated spectrum
  logic signed [WI-1:0] i_re [N], i_im [N];
  logic                 i_valid;

  fft_kernel #(.N(N), .W(WI), .INVERSE(1'b1)) u_ifft (
    .clk, .rst_n, .in_valid(acc_done),
    .in_re(acc_re), .in_im(acc_im),
    .out_valid(i_valid), .out_re(i_re), .out_im(i_im)
  );

  logic [TAG_W-1:0] tag_d [S+1];
  assign tag_d[0] = acc_tag;
  for (genvar s = 0; s < S; s++) begin : g_tag
    always_ff @(posedge clk) tag_d[s+1] <= tag_d[s];
  end

  always_comb begin
    out_valid = i_valid;
    out_tag   = tag_d[S];
    for (int k = 0; k < N; k++) out_y[k] = sat_word(64'(i_re[k]));
  end

  // the imaginary part of the output is rounding noise only
  logic unused_im;
  always_comb begin
    unused_im = 1'b0;
    for (int k = 0; k < N; k++) unused_im ^= ^i_im[k];
  end

endmodule
