// tb_fft_kernel: checks the forward and inverse FFT kernels against a
// direct DFT computed with real arithmetic. Random blocks are streamed one
// per clock; every output point must lie within a small rounding tolerance
// of the reference, and the first result must appear exactly log2(N) clocks
// after the first input.
module tb_fft_kernel;
  localparam int N = 8;
  localparam int W = 24;
  localparam int S = $clog2(N);
  localparam int NBLK = 24;
  localparam real PI = 3.14159265358979323846;

  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;
  always #5 clk = ~clk;

  logic                in_valid;
  logic signed [W-1:0] in_re [N], in_im [N];
  logic                f_v, i_v;
  logic signed [W-1:0] f_re [N], f_im [N], i_re [N], i_im [N];

  fft_kernel #(.N(N), .W(W), .INVERSE(1'b0)) u_f (.clk, .rst_n, .in_valid, .in_re, .in_im,
    .out_valid(f_v), .out_re(f_re), .out_im(f_im));
  fft_kernel #(.N(N), .W(W), .INVERSE(1'b1)) u_i (.clk, .rst_n, .in_valid, .in_re, .in_im,
    .out_valid(i_v), .out_re(i_re), .out_im(i_im));

  int checks = 0, failures = 0;
  int xr [NBLK][N], xi [NBLK][N];
  int nf = 0, ni = 0, cyc = 0, first_in = -1, first_f = -1, first_i = -1;

  task automatic cmp(input int blkn, input bit inv, input int k, input int gr, input int gi);
    real rr, ri, ang, tol;
    rr = 0.0; ri = 0.0;
    for (int m = 0; m < N; m++) begin
      ang = 2.0 * PI * k * m / N;
      if (!inv) begin
        rr += xr[blkn][m] * $cos(ang) + xi[blkn][m] * $sin(ang);
        ri += xi[blkn][m] * $cos(ang) - xr[blkn][m] * $sin(ang);
      end else begin
        rr += xr[blkn][m] * $cos(ang) - xi[blkn][m] * $sin(ang);
        ri += xi[blkn][m] * $cos(ang) + xr[blkn][m] * $sin(ang);
      end
    end
    if (inv) begin rr = rr / N; ri = ri / N; end
    tol = 4.0;
    checks++;
    if ((gr - rr > tol) || (rr - gr > tol) || (gi - ri > tol) || (ri - gi > tol)) begin
      failures++;
      if (failures < 10) $display("FAIL %s blk %0d k %0d: got (%0d,%0d) exp (%f,%f)", inv ? "ifft" : "fft", blkn, k, gr, gi, rr, ri);
    end
  endtask

  always @(posedge clk) begin
    cyc++;
    if (f_v) begin
      if (first_f < 0) first_f = cyc;
      for (int k = 0; k < N; k++) cmp(nf, 1'b0, k, int'(f_re[k]), int'(f_im[k]));
      nf++;
    end
    if (i_v) begin
      if (first_i < 0) first_i = cyc;
      for (int k = 0; k < N; k++) cmp(ni, 1'b1, k, int'(i_re[k]), int'(i_im[k]));
      ni++;
    end
  end

  initial begin
    in_valid = 0;
    for (int k = 0; k < N; k++) begin in_re[k] = '0; in_im[k] = '0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    for (int b = 0; b < NBLK; b++) begin
      @(negedge clk);
      in_valid = 1;
      for (int k = 0; k < N; k++) begin
        // first blocks: impulse and constant, then random
        if (b == 0)      begin xr[b][k] = (k == 0) ? 1000 : 0; xi[b][k] = 0; end
        else if (b == 1) begin xr[b][k] = 300; xi[b][k] = 0; end
        else begin
          xr[b][k] = int'($urandom_range(0, 8000)) - 4000;
          xi[b][k] = (b % 2) ? int'($urandom_range(0, 8000)) - 4000 : 0;
        end
        in_re[k] = W'(xr[b][k]);
        in_im[k] = W'(xi[b][k]);
      end
      if (b == 0) first_in = cyc + 1;
    end
    @(negedge clk) in_valid = 0;
    repeat (S + 4) @(posedge clk);
    checks++;
    if (nf != NBLK || ni != NBLK) begin failures++; $display("FAIL block count %0d %0d", nf, ni); end
    checks++;
    if (first_f - first_in != S || first_i - first_in != S) begin
      failures++; $display("FAIL latency %0d %0d (expected %0d)", first_f - first_in, first_i - first_in, S);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
