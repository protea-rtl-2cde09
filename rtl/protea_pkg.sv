// protea_pkg: types, default sizes and fixed-point helpers shared by the
// transformer-encoder accelerator.
//
// Data words are 8-bit signed fixed point (the evaluated configuration uses
// 8-bit fixed-point data). The split between integer and fraction bits is not
// specified for the original design; this RTL uses FRAC = 4 (Q3.4). Products
// of two data words carry 2*FRAC fraction bits and are accumulated in 32-bit
// words, then brought back to 8 bits by an arithmetic shift and saturation.
//
// The synthesis-time sizes below are the ones of the main configuration:
// embedding dimension 768, 8 parallel heads, sequence length 64, MHA tile 64,
// FFN tile 128. Runtime values (sequence length, embedding dimension, heads,
// layers) are programmed through the control registers and may be anything up
// to these maxima that the tile sizes divide.
package protea_pkg;

  localparam int unsigned DW      = 8;    // data word width
  localparam int unsigned ACCW    = 32;   // accumulator width
  localparam int unsigned FRAC    = 4;    // fraction bits of a data word
  localparam int unsigned PFRAC   = 7;    // fraction bits of a softmax probability
  localparam int unsigned SFRAC   = 8;    // fraction bits of an attention-score word (QK buffer)
  localparam int unsigned SW      = 16;   // attention-score word width (QK buffer)

  localparam int unsigned D_MAX   = 768;  // max embedding dimension d_model
  localparam int unsigned SL_MAX  = 64;   // max sequence length
  localparam int unsigned H_MAX   = 8;    // parallel attention heads
  localparam int unsigned DK_MAX  = D_MAX / H_MAX;  // per-head dimension d_model/h
  localparam int unsigned TS_MHA  = 64;   // tile size of the attention module
  localparam int unsigned TS_FFN  = 128;  // tile size of the FFN module

  typedef logic signed [DW-1:0]   data_t;
  typedef logic signed [ACCW-1:0] acc_t;
  typedef logic signed [SW-1:0]   score_t;

  // Runtime hyperparameters, written by the host through the control port.
  typedef struct packed {
    logic [15:0] sl;        // sequence length
    logic [15:0] d_model;   // embedding dimension
    logic [7:0]  heads;     // number of attention heads
    logic [7:0]  layers;    // number of encoder layers
    logic [31:0] x_base;    // byte address of the input matrix X (SL x d_model, row major)
    logic [31:0] w_base;    // byte address of layer 0 parameters
  } cfg_t;

  // Saturate a wide signed value to a data word.
  function automatic data_t sat8(input logic signed [47:0] v);
    if (v > 48'sd127)       return data_t'(8'sd127);
    else if (v < -48'sd128) return data_t'(-8'sd128);
    else                    return data_t'(v[7:0]);
  endfunction

  // Bring an accumulator with 2*FRAC fraction bits back to a data word.
  function automatic data_t requant(input acc_t a);
    logic signed [47:0] w;
    w = 48'(a) >>> FRAC;
    return sat8(w);
  endfunction

  // Byte offsets of one layer's parameters inside its block in external
  // memory, as functions of d = d_model (all matrices stored [out][in]):
  //   Wq, Wk, Wv : 3 * d*d (at offset 0)   bq, bk, bv : 3 * d
  //   W1 : d*d    gamma1, beta1 : 2 * d
  //   W2 : 4d*d   W3 : d*4d     gamma2, beta2 : 2 * d
  function automatic logic [31:0] off_bias(input logic [15:0] d); return 3 * 32'(d) * 32'(d); endfunction
  function automatic logic [31:0] off_w1(input logic [15:0] d); return off_bias(d) + 3 * 32'(d); endfunction
  function automatic logic [31:0] off_ln1(input logic [15:0] d); return off_w1(d) + 32'(d) * 32'(d); endfunction
  function automatic logic [31:0] off_w2(input logic [15:0] d); return off_ln1(d) + 2 * 32'(d); endfunction
  function automatic logic [31:0] off_w3(input logic [15:0] d); return off_w2(d) + 4 * 32'(d) * 32'(d); endfunction
  function automatic logic [31:0] off_ln2(input logic [15:0] d); return off_w3(d) + 4 * 32'(d) * 32'(d); endfunction
  function automatic logic [31:0] layer_bytes(input logic [15:0] d); return off_ln2(d) + 2 * 32'(d); endfunction

endpackage
