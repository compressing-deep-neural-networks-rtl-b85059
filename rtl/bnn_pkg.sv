// bnn_pkg: types, constants and helper functions shared by the binary/ternary
// MLP datapath.
//
// The network is a chain of blocks, each a binary or ternary dense layer
// followed by batch normalisation (BN) and an activation. Activations passed
// between blocks come in three encodings:
//   * binary  : 1 bit per node, 1 means +1 and 0 means -1 (the encoding that
//               turns a +-1 product into an XNOR);
//   * ternary : 2 bits per node, two's complement, 2'b01 = +1, 2'b11 = -1,
//               2'b00 = 0; the unused code 2'b10 reads as 0;
//   * fixed   : signed fixed point <W, I> (W bits in all, I of them integer
//               bits, W-I fraction bits), as used for the network input and
//               for ReLU / clipped-ReLU outputs.
// Ternary weights use the same 2-bit code, binary weights the 1-bit code.
//
// Trained parameters (weights, thresholds, BN scale and shift) are written
// through one configuration bus, cfg_wr_t, before inference. The bus layout,
// the BN scale format and the encodings of ternary values are choices of this
// implementation; the +-1 -> 1/0 encoding and the XNOR product follow the
// binary-network literature the design is built on.
package bnn_pkg;

  // Activation applied after the BN of a hidden block.
  typedef enum logic [1:0] {
    ACT_BINARY_TANH  = 2'd0,  // BN + binary tanh, merged into one threshold
    ACT_TERNARY_TANH = 2'd1,  // BN + ternary tanh, merged into two thresholds
    ACT_RELU         = 2'd2,  // explicit BN, then max(0, y)
    ACT_CLIPPED_RELU = 2'd3   // explicit BN, then min(max(0, y), 1)
  } act_e;

  // Encoding of a layer's input vector.
  typedef enum logic [1:0] {
    IN_FIXED   = 2'd0,
    IN_BINARY  = 2'd1,
    IN_TERNARY = 2'd2
  } in_kind_e;

  // What a configuration write targets inside the selected layer.
  typedef enum logic [2:0] {
    CFG_WEIGHT   = 3'd0,  // addr = row*N_OUT + node, data = CH weights
    CFG_THR0     = 3'd1,  // binary threshold, or lower ternary threshold
    CFG_THR1     = 3'd2,  // upper ternary threshold
    CFG_BN_SCALE = 3'd3,  // explicit BN scale, <BN_SCALE_W, BN_SCALE_W-BN_SCALE_F>
    CFG_BN_SHIFT = 3'd4   // explicit BN shift, in the block's output format
  } cfg_sel_e;

  localparam int CFG_LAYER_W = 2;    // up to four blocks
  localparam int CFG_AW      = 16;   // address width
  localparam int CFG_DW      = 128;  // data width (widest weight word)

  typedef struct packed {
    logic                   en;
    logic [CFG_LAYER_W-1:0] layer;
    cfg_sel_e               sel;
    logic [CFG_AW-1:0]      addr;
    logic [CFG_DW-1:0]      data;
  } cfg_wr_t;

  // Explicit BN scale: signed, BN_SCALE_F fraction bits.
  localparam int BN_SCALE_W = 16;
  localparam int BN_SCALE_F = 10;

  function automatic int clog2i(input int v);
    int r;
    r = 0;
    while ((1 << r) < v) r++;
    return r;
  endfunction

  // Bits per element of an input vector.
  function automatic int in_bits(input in_kind_e k, input int fix_w);
    case (k)
      IN_BINARY:  return 1;
      IN_TERNARY: return 2;
      default:    return fix_w;
    endcase
  endfunction

  // Accumulator width: the largest |sum| a layer can reach, plus sign.
  // Binary/ternary inputs times +-1/0 weights sum to at most N_IN in
  // magnitude; fixed inputs to N_IN * 2^(W-1).
  function automatic int acc_width(input in_kind_e k, input int fix_w, input int n_in);
    if (k == IN_FIXED) return fix_w + clog2i(n_in + 1);
    return clog2i(n_in + 1) + 1;
  endfunction

  // Value of a 2-bit ternary code.
  function automatic logic signed [1:0] tern_val(input logic [1:0] c);
    return c[0] ? (c[1] ? -2'sd1 : 2'sd1) : 2'sd0;
  endfunction

endpackage
