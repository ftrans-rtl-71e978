// ftrans_pkg: types and constants shared by the transformer accelerator.
//
// All activations and weights are 16-bit two's-complement fixed point. The
// word width follows the 16-bit fixed-point representation the design is
// built around; the split into 8 integer and 8 fraction bits (Q8.8) is this
// design's choice. Data moves between units in blocks of BLK = 8 words: the
// block-circulant (BCM) block size b and the lane count of the dense
// matrix-vector PEs are both set to 8, so one block is one FFT input and one
// PE operand.
//
// Weights and layer-norm parameters are written through one load bus
// (wload_t) that is decoded level by level: the top selects the layer, a
// layer selects the unit, a multi-head attention unit selects the head and
// the matrix. The bus layout is this design's own.
package ftrans_pkg;

  localparam int DATA_W = 16;  // word width
  localparam int FRAC   = 8;   // fraction bits of a word (Q8.8)
  localparam int BLK    = 8;   // words per block = BCM block size = PE lanes

  typedef logic signed [DATA_W-1:0] word_t;
  typedef word_t [BLK-1:0]          blk_t;

  // Unit codes inside one encoder / decoder layer (wload_t.unit).
  localparam logic [3:0] U_MHA1  = 4'd0;  // (masked) self attention
  localparam logic [3:0] U_MHA2  = 4'd1;  // attention over the encoder output
  localparam logic [3:0] U_FFN1  = 4'd2;  // first BCM feed-forward layer
  localparam logic [3:0] U_FFN2  = 4'd3;  // second BCM feed-forward layer
  localparam logic [3:0] U_NORM1 = 4'd4;  // add/norm after the first attention
  localparam logic [3:0] U_NORM2 = 4'd5;  // add/norm after the second sub-layer
  localparam logic [3:0] U_NORM3 = 4'd6;  // add/norm after the decoder FFN

  // Matrix codes inside one attention unit (wload_t.mat).
  localparam logic [1:0] M_Q  = 2'd0;
  localparam logic [1:0] M_K  = 2'd1;
  localparam logic [1:0] M_V  = 2'd2;
  localparam logic [1:0] M_FC = 2'd3;     // output linear layer W^O (head ignored)

  // Weight / parameter load bus.
  //   attention Q/K/V of a head : addr = row*DK + col,  data[15:0] = W[row][col]
  //   attention W^O             : addr = row*D  + col,  data[15:0]
  //   BCM layer                 : addr = (i*G + j)*BLK + k, data = {Im, Re} of FFT(p_ij)[k]
  //   layer norm                : addr = column,        data = {beta, gamma}
  typedef struct packed {
    logic        en;
    logic [3:0]  layer;
    logic [3:0]  unit;
    logic [3:0]  head;
    logic [1:0]  mat;
    logic [19:0] addr;
    logic [31:0] data;
  } wload_t;

  // Saturate a wide signed value to one word.
  function automatic word_t sat_word(input logic signed [63:0] v);
    if (v > 64'sd32767)       return 16'sh7fff;
    else if (v < -64'sd32768) return 16'sh8000;
    else                      return word_t'(v);
  endfunction

  // Arithmetic right shift with round-half-up, then saturate to one word.
  function automatic word_t round_shift(input logic signed [63:0] v, input int sh);
    logic signed [63:0] r;
    r = (sh > 0) ? ((v + (64'sd1 <<< (sh - 1))) >>> sh) : v;
    return sat_word(r);
  endfunction

endpackage
