// tf_pkg: types and integer arithmetic shared by every block of the
// integer-only, mixed-precision Transformer accelerator.
//
// Every tensor in the accelerator is a signed b-bit integer (b = 4, 6 or 8)
// with an asymmetric quantisation: real = scale * (q - zero_point).  Biases
// are symmetric (zero point 0) with scale = scale_x * scale_w, so a bias can
// be added straight into the multiply-accumulator.  Requantisation of an
// accumulator to the next tensor's scale is an integer multiply by M
// followed by a rounding arithmetic right shift by S, plus the output zero
// point, then saturation to the output bitwidth.  The asymmetric activations
// and weights and the symmetric bias follow the paper; the M/S fixed-point
// form of the rescale, the field widths below and the parameter-load bus are
// this design's own choices.
package tf_pkg;

  // Resource type for intermediate-result buffers: block RAM, LUT RAM
  // (distributed), or left to the synthesis tool.
  typedef enum logic [1:0] {
    RAM_BRAM = 2'd0,
    RAM_DRAM = 2'd1,
    RAM_AUTO = 2'd2
  } ram_style_e;

  localparam int ACC_W = 32;   // multiply-accumulator width
  localparam int ZP_W  = 8;    // zero-point field width
  localparam int M_W   = 16;   // requantisation multiplier width (unsigned)
  localparam int S_W   = 6;    // requantisation shift width

  // Requantisation of a matrix product: y = sat(zy + (acc*m) >> s).
  // za / zb are the zero points of the two operands.
  typedef struct packed {
    logic signed [ZP_W-1:0] za;
    logic signed [ZP_W-1:0] zb;
    logic signed [ZP_W-1:0] zy;
    logic        [M_W-1:0]  m;
    logic        [S_W-1:0]  s;
  } rq_cfg_t;

  // Quantised addition: y = sat(zy + ((x1-z1)*m1 + (x2-z2)*m2) >> s).
  typedef struct packed {
    logic signed [ZP_W-1:0] z1;
    logic signed [ZP_W-1:0] z2;
    logic signed [ZP_W-1:0] zy;
    logic        [M_W-1:0]  m1;
    logic        [M_W-1:0]  m2;
    logic        [S_W-1:0]  s;
  } add_cfg_t;

  // Folded batch normalisation: y = sat(zy + ((x-zx)*g[c] + beta[c]) >> s);
  // the per-channel g and beta live in the block's parameter memory.
  typedef struct packed {
    logic signed [ZP_W-1:0] zx;
    logic signed [ZP_W-1:0] zy;
    logic        [S_W-1:0]  s;
  } bn_cfg_t;

  // Quantisation constants of the whole model, one field per operation.
  typedef struct packed {
    rq_cfg_t  l_in;
    add_cfg_t add_pe;
    rq_cfg_t  qkv;
    rq_cfg_t  score;
    rq_cfg_t  ctx;
    rq_cfg_t  oproj;
    add_cfg_t add_mha;
    bn_cfg_t  bn_mha;
    rq_cfg_t  ffn1;
    rq_cfg_t  ffn2;
    add_cfg_t add_ffn;
    bn_cfg_t  bn_ffn;
    rq_cfg_t  gap;
    rq_cfg_t  l_out;
  } tf_cfg_t;

  // Parameter memories that the host loads before inference.
  typedef enum logic [4:0] {
    PRM_W_IN   = 5'd0,
    PRM_B_IN   = 5'd1,
    PRM_PE     = 5'd2,
    PRM_W_QKV  = 5'd3,
    PRM_B_QKV  = 5'd4,
    PRM_W_O    = 5'd5,
    PRM_B_O    = 5'd6,
    PRM_EXP    = 5'd7,
    PRM_BN_MHA = 5'd8,
    PRM_W_1    = 5'd9,
    PRM_B_1    = 5'd10,
    PRM_W_2    = 5'd11,
    PRM_B_2    = 5'd12,
    PRM_BN_FFN = 5'd13,
    PRM_W_OUT  = 5'd14,
    PRM_B_OUT  = 5'd15
  } prm_sel_e;

  // One write into a parameter memory (data is sign- or zero-truncated to
  // the width of the addressed memory).
  typedef struct packed {
    logic        en;
    prm_sel_e    sel;
    logic [15:0] addr;
    logic [31:0] data;
  } prm_wr_t;

  // (v * m) >> s with round-half-up; m is unsigned.
  function automatic longint rq_scale(input longint v, input logic [M_W-1:0] m,
                                      input logic [S_W-1:0] s);
    longint p;
    p = v * longint'({48'd0, m});
    if (s == '0) return p;
    return (p + (64'sd1 <<< (s - 1))) >>> s;
  endfunction

  // Saturate v to a signed integer of 'bits' bits.
  function automatic longint sat(input longint v, input int bits);
    longint lo, hi;
    hi = (64'sd1 <<< (bits - 1)) - 1;
    lo = -(64'sd1 <<< (bits - 1));
    if (v > hi) return hi;
    if (v < lo) return lo;
    return v;
  endfunction

  // Bias bitwidth of a linear layer: the accumulator of an a-bit by w-bit
  // product, plus two guard bits (8x8 -> 18, 4x8 -> 14, 6x8 -> 16).
  function automatic int bias_bits(input int a_bits, input int w_bits);
    return a_bits + w_bits + 2;
  endfunction

  // Resource type of one intermediate buffer of 'bits' bits: buffers of at
  // least bram_min_bits bits go to block RAM, the rest use 'style'
  // (bram_min_bits = 0 disables the size rule).
  function automatic ram_style_e buf_style(input ram_style_e style, input int bits,
                                           input int bram_min_bits);
    return (bram_min_bits > 0 && bits >= bram_min_bits) ? RAM_BRAM : style;
  endfunction

  function automatic int clog2_1(input int v);
    return (v > 1) ? $clog2(v) : 1;
  endfunction

endpackage
