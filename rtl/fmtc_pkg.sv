// fmtc_pkg: widths and shared helpers of the feature-map transform-coding layer.
//
// A layer computes, for every output pixel and output feature, one value of the
// PCA-domain feature map (convolution, batch norm and the forward PCA folded into
// one set of 8-bit weights), quantizes it with one step size for all channels and
// Huffman-codes it into external memory. On the way back in, the decoder undoes
// the Huffman code, rescales the levels, applies the inverse PCA and the ReLU.
// Activations and weights are 8 bits, as in the reference design; every other
// width here is a choice of this implementation, sized so nothing can overflow.
package fmtc_pkg;

  localparam int unsigned ACT_W   = 8;   // activation width (unsigned, post-ReLU)
  localparam int unsigned WGT_W   = 8;   // folded conv/BN/PCA weight width (signed)
  localparam int unsigned LVL_W   = 8;   // quantized PCA level width (signed) = VLC symbol
  localparam int unsigned ACC_W   = 32;  // convolution accumulator and bias width
  localparam int unsigned QMUL_W  = 16;  // quantizer reciprocal step (unsigned)
  localparam int unsigned DEQ_W   = 16;  // dequantizer step (unsigned)
  localparam int unsigned Y_W     = LVL_W + DEQ_W;  // dequantized coefficient width
  localparam int unsigned TW_W    = 8;   // inverse-PCA matrix entry width (signed)
  localparam int unsigned X_W     = 48;  // inverse-PCA accumulator and bias width
  localparam int unsigned OMUL_W  = 16;  // output requantizer multiplier
  localparam int unsigned SHIFT_W = 6;   // shift amount of both requantizers
  localparam int unsigned MAX_LEN = 16;  // longest Huffman code word
  localparam int unsigned LEN_W   = 5;   // code length field (1..MAX_LEN)
  localparam int unsigned NSYM    = 1 << LVL_W;
  localparam int unsigned MEM_W   = 64;  // external memory word
  localparam int unsigned ADDR_W  = 32;  // external memory word address

  // Layer phases, in order of a layer's run.
  typedef enum logic [2:0] {
    PH_IDLE    = 3'd0,
    PH_LOAD    = 3'd1,  // decode the compressed input map into the input cache
    PH_COMPUTE = 3'd2,  // convolve, quantize, encode, write
    PH_FLUSH   = 3'd3,  // drain the pipeline and the last partial memory word
    PH_DONE    = 3'd4
  } phase_e;

  // Per-layer settings written by the host before `start`.
  typedef struct packed {
    logic [ADDR_W-1:0]  in_base;   // first word of the compressed input map
    logic [ADDR_W-1:0]  in_words;  // its length in MEM_W-bit words
    logic [ADDR_W-1:0]  out_base;  // first word of the compressed output map
    logic [QMUL_W-1:0]  qmul;      // quantizer: 2^qshift / Delta
    logic [SHIFT_W-1:0] qshift;
    logic [DEQ_W-1:0]   deq;       // dequantizer: Delta of the input map
    logic [OMUL_W-1:0]  omul;      // activation requantizer scale
    logic [SHIFT_W-1:0] oshift;
  } layer_cfg_t;

  // Tables loaded through the host table port.
  typedef enum logic [2:0] {
    TAB_WEIGHT = 3'd0,  // addr0 = filter, addr1 = element, data = weight
    TAB_BIAS   = 3'd1,  // addr0 = filter, data = bias
    TAB_VLC    = 3'd2,  // addr0 = symbol, data = {len, code} (len in [20:16])
    TAB_VLD_L  = 3'd3,  // addr0 = length, data = {base[32:25], count[24:16], first[15:0]}
    TAB_VLD_S  = 3'd4,  // addr0 = index,  data = symbol
    TAB_IPCA_M = 3'd5,  // addr0 = row (output channel), addr1 = column, data = entry
    TAB_IPCA_B = 3'd6   // addr0 = channel, data = offset mu
  } tab_e;

  // Round-half-up arithmetic right shift of a signed value: (v + 2^(s-1)) >>> s.
  function automatic logic signed [63:0] rshift_round(input logic signed [63:0] v,
                                                      input logic [SHIFT_W-1:0] s);
    logic signed [63:0] half;
    half = (s == 0) ? 64'sd0 : (64'sd1 <<< (s - 1));
    return (v + half) >>> s;
  endfunction

endpackage
