// fft_kernel: pipelined radix-2 Cooley-Tukey FFT / IFFT of one block.
//
// Takes N complex points per clock and returns their transform log2(N)
// clocks later, one block per clock in flight. The input is permuted into
// bit-reversed order (wiring only), then log2(N) decimation-in-time stages
// of N/2 butterflies each follow, one register rank per stage. Every
// butterfly multiplies its lower input by a twiddle factor and forms the sum
// and the difference with the upper input. The twiddle factors are constants
// (the "register bank" of the PE), computed at elaboration as cos/sin in
// Q2.14. With INVERSE = 1 the twiddles are conjugated and the outputs are
// divided by N (rounded arithmetic shift), so the kernel computes the IFFT.
//
// Radix-2 Cooley-Tukey and the butterfly/twiddle-bank structure follow the
// paper's PE; the one-register-per-stage pipelining, the Q2.14 twiddles and
// the data width W are this design's choices. No scaling is applied inside
// the forward transform: W must leave log2(N) bits of headroom.
//
// Timing: out_valid / out_* follow in_valid / in_* by log2(N) clocks.
module fft_kernel #(
  parameter int N       = 8,
  parameter int W       = 24,
  parameter bit INVERSE = 1'b0
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                in_valid,
  input  logic signed [W-1:0] in_re [N],
  input  logic signed [W-1:0] in_im [N],
  output logic                out_valid,
  output logic signed [W-1:0] out_re [N],
  output logic signed [W-1:0] out_im [N]
);
  localparam int S   = $clog2(N);
  localparam int TWF = 14;
  localparam real PI = 3.14159265358979323846;

  typedef logic signed [15:0] tw_t [N/2];

  function automatic logic signed [15:0] q14(input real v);
    return 16'($rtoi(v * 16384.0 + ((v >= 0.0) ? 0.5 : -0.5)));
  endfunction

  // W_N^k = cos(2*pi*k/N) - j*sin(2*pi*k/N); conjugate for the inverse.
  function automatic tw_t mk_tw(input bit im);
    tw_t r;
    for (int k = 0; k < N/2; k++) begin
      if (!im) r[k] = q14($cos(2.0 * PI * k / N));
      else     r[k] = INVERSE ? q14($sin(2.0 * PI * k / N)) : q14(-$sin(2.0 * PI * k / N));
    end
    return r;
  endfunction

  localparam tw_t TW_RE = mk_tw(1'b0);
  localparam tw_t TW_IM = mk_tw(1'b1);

  function automatic int bitrev(input int v);
    int r = 0;
    for (int b = 0; b < S; b++) if (v[b]) r |= 1 << (S - 1 - b);
    return r;
  endfunction

  logic signed [W-1:0] sr [S+1][N];
  logic signed [W-1:0] si [S+1][N];
  logic                sv [S+1];

  always_comb begin
    for (int i = 0; i < N; i++) begin
      sr[0][i] = in_re[bitrev(i)];
      si[0][i] = in_im[bitrev(i)];
    end
    sv[0] = in_valid;
  end

  for (genvar s = 0; s < S; s++) begin : g_stage
    localparam int HALF = 1 << s;
    localparam int STEP = N / (2 * HALF);   // twiddle index stride
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        sv[s+1] <= 1'b0;
        for (int i = 0; i < N; i++) begin
          sr[s+1][i] <= '0;
          si[s+1][i] <= '0;
        end
      end else begin
        sv[s+1] <= sv[s];
        for (int g = 0; g < N; g += 2 * HALF) begin
          for (int k = 0; k < HALF; k++) begin
            logic signed [W+16:0] pr, pi_;
            logic signed [W-1:0]  tr, ti;
            pr = W'(sr[s][g+k+HALF]) * TW_RE[k*STEP] - W'(si[s][g+k+HALF]) * TW_IM[k*STEP];
            pi_ = W'(sr[s][g+k+HALF]) * TW_IM[k*STEP] + W'(si[s][g+k+HALF]) * TW_RE[k*STEP];
            tr = W'((pr + (1 <<< (TWF - 1))) >>> TWF);
            ti = W'((pi_ + (1 <<< (TWF - 1))) >>> TWF);
            sr[s+1][g+k]      <= sr[s][g+k] + tr;
            si[s+1][g+k]      <= si[s][g+k] + ti;
            sr[s+1][g+k+HALF] <= sr[s][g+k] - tr;
            si[s+1][g+k+HALF] <= si[s][g+k] - ti;
          end
        end
      end
    end
  end

  always_comb begin
    out_valid = sv[S];
    for (int i = 0; i < N; i++) begin
      if (INVERSE) begin
        out_re[i] = (sr[S][i] + W'(N / 2)) >>> S;
        out_im[i] = (si[S][i] + W'(N / 2)) >>> S;
      end else begin
        out_re[i] = sr[S][i];
        out_im[i] = si[S][i];
      end
    end
  end

endmodule
