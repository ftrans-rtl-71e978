// tb_seq_buf: writes random words and blocks with random masks into the
// buffer, keeps a shadow copy, and reads back through both ports; words of
// columns >= D must read as zero.
module tb_seq_buf;
  import ftrans_pkg::*;
  localparam int L = 8, D = 20, NB = (D + BLK - 1) / BLK;
  logic clk = 0;
  always #5 clk = ~clk;

  logic we;
  logic [$clog2(L)-1:0] wtok, ra_tok, rb_tok;
  logic [$clog2(NB)-1:0] wblk, ra_blk, rb_blk;
  logic [BLK-1:0] wmask;
  blk_t wdata, ra_data, rb_data;

  seq_buf #(.L(L), .D(D)) dut (.*);

  word_t shadow [L][NB*BLK];
  int checks = 0, failures = 0;

  initial begin
    we = 0;
    // fill everything first
    for (int t = 0; t < L; t++)
      for (int b = 0; b < NB; b++) begin
        @(negedge clk);
        we = 1; wtok = t[$clog2(L)-1:0]; wblk = b[$clog2(NB)-1:0]; wmask = '1;
        for (int l = 0; l < BLK; l++) begin
          wdata[l] = word_t'($urandom);
          shadow[t][b*BLK+l] = wdata[l];
        end
      end
    // random masked writes
    for (int i = 0; i < 200; i++) begin
      int t, b;
      @(negedge clk);
      t = $urandom_range(0, L-1); b = $urandom_range(0, NB-1);
      we = 1; wtok = t[$clog2(L)-1:0]; wblk = b[$clog2(NB)-1:0]; wmask = BLK'($urandom);
      for (int l = 0; l < BLK; l++) begin
        wdata[l] = word_t'($urandom);
        if (wmask[l]) shadow[t][b*BLK+l] = wdata[l];
      end
    end
    @(negedge clk) we = 0;
    for (int t = 0; t < L; t++)
      for (int b = 0; b < NB; b++) begin
        ra_tok = t[$clog2(L)-1:0]; ra_blk = b[$clog2(NB)-1:0];
        rb_tok = 3'(L - 1 - t);    rb_blk = b[$clog2(NB)-1:0];
        #1;
        for (int l = 0; l < BLK; l++) begin
          word_t ea, eb;
          ea = (b*BLK+l < D) ? shadow[t][b*BLK+l] : '0;
          eb = (b*BLK+l < D) ? shadow[L-1-t][b*BLK+l] : '0;
          checks += 2;
          if (ra_data[l] != ea) begin failures++; $display("FAIL a t%0d b%0d l%0d", t, b, l); end
          if (rb_data[l] != eb) begin failures++; $display("FAIL b t%0d b%0d l%0d", t, b, l); end
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
