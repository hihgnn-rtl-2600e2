// hihgnn_pkg -- types, constants and fixed-point helpers shared by the HiHGNN blocks.
//
// All datapath values are 32-bit two's-complement integers read as Q16.16 fixed point
// (16 fraction bits). The 32-bit integer word width follows the design's stated precision;
// the split into 16 integer and 16 fraction bits is this implementation's choice.
// Vertices are named by the pair (type, index): a 2-bit type and a 14-bit index.
package hihgnn_pkg;

  localparam int unsigned DATA_W   = 32;
  localparam int unsigned FRAC_W   = 16;
  localparam int unsigned VTYPE_W  = 2;    // up to four vertex types per graph
  localparam int unsigned VIDX_W   = 14;   // up to 16384 vertices per type
  localparam int unsigned VID_W    = VTYPE_W + VIDX_W;

  typedef logic signed [DATA_W-1:0] word_t;

  typedef struct packed {
    logic [VTYPE_W-1:0] vtype;
    logic [VIDX_W-1:0]  idx;
  } vid_t;

  localparam word_t FX_ONE = 32'sh0001_0000;

  // Element-wise operations of a SIMD core.
  typedef enum logic [2:0] {
    SIMD_ADD  = 3'd0,   // a + b
    SIMD_SUB  = 3'd1,   // a - b
    SIMD_MUL  = 3'd2,   // a * b
    SIMD_MAC  = 3'd3,   // c + a * b
    SIMD_DIV  = 3'd4,   // a / b  (b == 0 gives 0)
    SIMD_MAX  = 3'd5,   // max(a, b)
    SIMD_PASS = 3'd6    // a
  } simd_op_t;

  // Non-linear functions of the activation module.
  typedef enum logic [2:0] {
    ACT_PASS  = 3'd0,
    ACT_RELU  = 3'd1,
    ACT_LRELU = 3'd2,   // LeakyReLU, negative slope 0.2
    ACT_ELU   = 3'd3,   // ELU, alpha = 1
    ACT_EXP   = 3'd4,   // exp, the Softmax numerator
    ACT_TANH  = 3'd5
  } act_op_t;

  // Q16.16 multiply, truncating toward minus infinity.
  function automatic word_t fx_mul(word_t a, word_t b);
    logic signed [63:0] p;
    p = 64'(a) * 64'(b);
    return word_t'(p >>> FRAC_W);
  endfunction

  // Q16.16 divide, truncating toward zero; a zero divisor gives zero.
  function automatic word_t fx_div(word_t a, word_t b);
    logic signed [63:0] n;
    if (b == 0) return '0;
    n = 64'(a) <<< FRAC_W;
    return word_t'(n / 64'(b));
  endfunction

endpackage
