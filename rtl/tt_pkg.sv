// tt_pkg: sizes, quantization constants and shared types of the integer-only
// Transformer accelerator.
//
// The model is a single-head, encoder-only Transformer for single-step
// time-series forecasting. The default configuration is the 4-bit model with
// input length n = 12, embedding width d_model = 32 and m = 7 input features
// (the multivariate air-quality case), with the feed-forward width 4*d_model.
//
// Every layer rescales its wide integer result with an "ApproxMul" constant
// pair (M, shift), i.e. a multiplication by M * 2^-shift, and adds an output
// zero point. In a trained model these numbers come from the quantization
// scales; the values below are this design's own choice, picked so that
// uniformly random 4-bit weights keep the activations inside the 4-bit range
// most of the time. Change them together with the weights of a trained model.
package tt_pkg;

  // ---------------------------------------------------------------- sizes
  parameter int unsigned B       = 4;          // bitwidth of every tensor
  parameter int unsigned N_SEQ   = 12;         // input length n
  parameter int unsigned D_MODEL = 32;         // embedding width
  parameter int unsigned M_IN    = 7;          // input features m
  parameter int unsigned D_FFN   = 4 * D_MODEL;
  parameter int unsigned ACC_W   = 32;         // accumulator width
  parameter int unsigned MUL_W   = 16;         // width of the ApproxMul factor M
  parameter int unsigned SH_W    = 6;          // width of the ApproxMul shift
  parameter int unsigned CFG_AW  = 16;         // load-port address width
  parameter int unsigned CFG_DW  = 32;         // load-port data width (>= 3B)

  // ------------------------------------------------ quantization constants
  // One set per rescaling step. zx / zw: zero points of the two operands,
  // zy: output zero point, m / shr: ApproxMul factor and shift.
  typedef struct packed {
    int zx;
    int zw;
    int zy;
    int m;
    int shr;
  } qparam_t;

  // linear layers
  parameter qparam_t Q_LIN_IN  = '{zx: -1, zw: 0, zy: 0, m: 455, shr: 13};
  parameter qparam_t Q_LIN_Q   = '{zx:  0, zw: 1, zy: 0, m: 205, shr: 13};
  parameter qparam_t Q_LIN_K   = '{zx:  0, zw: 0, zy: 1, m: 205, shr: 13};
  parameter qparam_t Q_LIN_V   = '{zx:  0, zw: -1, zy: 0, m: 205, shr: 13};
  parameter qparam_t Q_LIN_O   = '{zx: -1, zw: 0, zy: 0, m: 205, shr: 13};
  parameter qparam_t Q_LIN_F1  = '{zx:  0, zw: 0, zy: -2, m: 205, shr: 13};
  parameter qparam_t Q_LIN_F2  = '{zx: -2, zw: 1, zy: 0, m: 102, shr: 13};
  parameter qparam_t Q_LIN_OUT = '{zx:  0, zw: 0, zy: 0, m: 1640, shr: 13};
  // matrix products: zx / zw are the zero points of operand A / B;
  // the 1/sqrt(d_model/h) factor of the attention score is folded into m
  parameter qparam_t Q_MM_SCORE = '{zx: 0, zw: 1, zy: 0, m: 150, shr: 13};
  parameter qparam_t Q_MM_ATTN  = '{zx: -8, zw: 0, zy: 0, m: 600, shr: 13};
  // batch normalisation: zx input, zw gamma zero point
  parameter qparam_t Q_BN_MHA = '{zx: 0, zw: 0, zy: 0, m: 2048, shr: 13};
  parameter qparam_t Q_BN_FFN = '{zx: 0, zw: 0, zy: 0, m: 2048, shr: 13};
  // global average pooling: 1/n folded into m
  parameter qparam_t Q_GAP = '{zx: 0, zw: 0, zy: 0, m: 1365, shr: 14};

  // additions: operand 1 and operand 2 are rescaled separately
  typedef struct packed {
    int z1;
    int z2;
    int z3;
    int m1;
    int sh1;
    int m2;
    int sh2;
  } qadd_t;

  parameter qadd_t Q_ADD_PE  = '{z1: 0, z2: 0, z3: 0, m1: 3, sh1: 2, m2: 1, sh2: 1};
  parameter qadd_t Q_ADD_MHA = '{z1: 0, z2: 0, z3: 1, m1: 1, sh1: 1, m2: 3, sh2: 2};
  parameter qadd_t Q_ADD_FFN = '{z1: 0, z2: 0, z3: 0, m1: 1, sh1: 1, m2: 3, sh2: 2};

  // softmax: Z_E from S_E = n^2*h / (2^(2b) - 1) and Z_E = 2^(2b-1) - 1/S_E,
  // i.e. 128 - 255/144 = 126.2 -> 126 for b = 4, n = 12, h = 1.
  // Z_A is the zero point of the attention weights (range [0, 1]). The top
  // computes both from its own N and B; these are the default-size values.
  parameter int SM_Z_E = 126;
  parameter int SM_Z_A = -8;

  // --------------------------------------------------------- load targets
  // Everything the host writes goes through one port; target selects the
  // memory, addr is the word address inside it.
  typedef enum logic [4:0] {
    T_X        = 5'd0,   // input samples, n x m, row-major
    T_LIN_IN_W = 5'd1,  T_LIN_IN_B = 5'd2,
    T_LQ_W     = 5'd3,  T_LQ_B     = 5'd4,
    T_LK_W     = 5'd5,  T_LK_B     = 5'd6,
    T_LV_W     = 5'd7,  T_LV_B     = 5'd8,
    T_LO_W     = 5'd9,  T_LO_B     = 5'd10,
    T_F1_W     = 5'd11, T_F1_B     = 5'd12,
    T_F2_W     = 5'd13, T_F2_B     = 5'd14,
    T_OUT_W    = 5'd15, T_OUT_B    = 5'd16,
    T_PE       = 5'd17,  // positional encoding, n x d_model
    T_NLUT     = 5'd18,  // softmax numerator table, 2^b entries
    T_DLUT     = 5'd19,  // softmax denominator table, 2^b entries
    T_BN1_G    = 5'd20, T_BN1_B    = 5'd21,
    T_BN2_G    = 5'd22, T_BN2_B    = 5'd23
  } cfg_target_e;

  typedef struct packed {
    logic                     we;
    cfg_target_e              target;
    logic [CFG_AW-1:0]        addr;
    logic signed [CFG_DW-1:0] data;
  } cfg_wr_t;

  // ------------------------------------------------------ model schedule
  typedef enum logic [4:0] {
    ST_IDLE,
    ST_LIN_IN,   // X -> L_input
    ST_ADD_PE,   // + positional encoding
    ST_LQ, ST_LK, ST_LV,
    ST_SCORE,    // Q K^T
    ST_SOFTMAX,
    ST_ATTN,     // softmax * V
    ST_LO,
    ST_ADD_MHA,
    ST_BN_MHA,
    ST_FFN1,     // L_FFN1 with ReLU on its output
    ST_FFN2,
    ST_ADD_FFN,
    ST_BN_FFN,
    ST_GAP,
    ST_LIN_OUT,
    ST_DONE
  } stage_e;

  // clamp to a signed w-bit range
  function automatic longint sat(longint v, int unsigned w);
    longint hi, lo;
    hi = (longint'(1) <<< (w - 1)) - 1;
    lo = -(longint'(1) <<< (w - 1));
    return (v > hi) ? hi : (v < lo) ? lo : v;
  endfunction

endpackage
