// seq_buf: on-chip sequence buffer (memory bank) for one activation matrix.
//
// Holds L tokens x D columns of 16-bit words, organised as L x ceil(D/BLK)
// blocks of BLK words. One write port writes a block with a per-word enable
// mask, so a producer can write whole blocks (the BCM feed-forward layers)
// or single words (attention, add/norm). Two independent read ports each
// return one block, with the words of columns >= D forced to zero so that
// consumers can run over whole blocks without reading stale data.
//
// The buffers between sub-layers, between layers and between the encoder
// and decoder stacks are all instances of this module. Read ports are
// combinational (distributed-RAM style); that, the block organisation and the
// zero padding are this design's choices.
module seq_buf
  import ftrans_pkg::*;
#(
  parameter int L = 64,
  parameter int D = 200,
  localparam int NB = (D + BLK - 1) / BLK
) (
  input  logic                       clk,
  input  logic                       we,
  input  logic [$clog2(L)-1:0]       wtok,
  input  logic [$clog2(NB)-1:0]      wblk,
  input  logic [BLK-1:0]             wmask,
  input  blk_t                       wdata,
  input  logic [$clog2(L)-1:0]       ra_tok,
  input  logic [$clog2(NB)-1:0]      ra_blk,
  output blk_t                       ra_data,
  input  logic [$clog2(L)-1:0]       rb_tok,
  input  logic [$clog2(NB)-1:0]      rb_blk,
  output blk_t                       rb_data
);

  blk_t mem [L][NB];

  always_ff @(posedge clk) begin
    if (we && 32'(wblk) < NB)
      for (int l = 0; l < BLK; l++)
        if (wmask[l]) mem[wtok][wblk][l] <= wdata[l];
  end

  function automatic blk_t rd(input logic [$clog2(L)-1:0] t, input logic [$clog2(NB)-1:0] b);
    blk_t r;
    r = (32'(b) < NB) ? mem[t][b] : '0;
    for (int l = 0; l < BLK; l++)
      if (32'(b) * BLK + l >= D) r[l] = '0;
    return r;
  endfunction

  assign ra_data = rd(ra_tok, ra_blk);
  assign rb_data = rd(rb_tok, rb_blk);

endmodule
