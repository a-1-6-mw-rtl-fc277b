// dla_pkg: types and constants shared by the sparse speech-separation
// accelerator.
//
// Number format. Weights and activations are "shifted" 8-bit floating point:
// bit 7 sign, bits 6:3 exponent E, bits 2:0 mantissa M, value
// (-1)^S * 1.M * 2^(E-15). The bias of 15 (instead of the IEEE-like 7 of a
// 4-bit exponent) moves the whole range below 2.0 and down to 2^-15,
// where the weights and activations of the network live. The format has no infinities, NaNs or
// subnormals; this design reserves the code with E=0 and M=0 (either sign)
// as zero, so the smallest magnitude is 1.125*2^-15 and the largest 1.875.
//
// Accumulation is in signed fixed point with ACC_FRAC fraction bits. Every
// product of two FP8 numbers is exact at 36 fraction bits; with ACC_FRAC=24
// products below 2^-24 lose their low bits (truncated toward zero).
//
// Layer descriptor. The host writes two 64-bit words (cfg0_t, cfg1_t) into
// the control register and then a start command. The field layout is this
// design's own; the paper does not give one.
//
// Lint notes: fp8_is_zero ignores the sign bit by definition (both signed
// zeros are zero), and constants that only some modules use are reported
// unused when the package is checked alone.
package dla_pkg;

  localparam int LANES     = 8;    // PEs / bytes per 64-bit buffer word
  localparam int DATA_W    = 64;   // buffer word width
  localparam int BUF_DEPTH = 256;  // words per buffer bank
  localparam int ADDR_W    = 8;    // buffer address width
  localparam int EXP_BIAS  = 15;   // shifted FP8 exponent bias
  localparam int ACC_FRAC  = 24;   // fraction bits of products/accumulators
  localparam int PROD_W    = 28;   // signed product width (|p| < 4)
  localparam int ACC_W     = 36;   // PE accumulator width
  localparam int SUM_W     = ACC_W + 3;  // sum of eight accumulators
  localparam int BN_DEPTH  = 32;   // BN register entries
  localparam int BN_AW     = 5;

  typedef logic [7:0] fp8_t;

  // Convolution kinds of the separation network.
  typedef enum logic [1:0] {
    MODE_CONV  = 2'd0,  // 1-D convolution (encoder), broadcast + zero skip
    MODE_PW    = 2'd1,  // 1x1 pointwise convolution, broadcast + zero skip
    MODE_DW    = 2'd2,  // depthwise dilated convolution, one channel per PE
    MODE_TCONV = 2'd3   // transposed convolution (decoder), PE outputs summed
  } mode_e;

  typedef enum logic [1:0] {
    ACT_NONE = 2'd0,
    ACT_RELU = 2'd1,
    ACT_TANH = 2'd2   // piecewise-linear tanh, see norm_act
  } act_e;

  // Host port targets.
  typedef enum logic [1:0] {
    HOST_CTRL = 2'd0,  // control register (addr 0: cfg0, 1: cfg1, 2: command)
    HOST_WBUF = 2'd1,  // weight buffer, bank not used by the accelerator
    HOST_BUF1 = 2'd2,  // in/out buffer1, bank not used by the accelerator
    HOST_BN   = 2'd3   // BN register
  } host_sel_e;

  typedef struct packed {
    logic [25:0] rsvd;
    mode_e       mode;
    act_e        act;
    logic        src_buf2;   // 1: activations from buffer2, 0: buffer1
    logic        dst_buf2;   // 1: results to buffer2, 0: buffer1
    logic        buf1_bank;  // buffer1 bank used by the accelerator
    logic        wbuf_bank;  // weight buffer bank used by the accelerator
    logic        bn_en;      // 0: scale 1, bias 0
    logic [4:0]  bn_base;    // BN register entry of the first scale word
    logic [7:0]  act_base;
    logic [7:0]  wgt_base;
    logic [7:0]  out_base;
  } cfg0_t;

  typedef struct packed {
    logic [18:0] rsvd;
    logic [8:0]  n_pos;      // output positions (TCONV: output words of 8 samples)
    logic [7:0]  n_in;       // CONV/PW: words per window; DW/TCONV: taps
    logic [7:0]  in_stride;  // CONV/PW: words between consecutive windows
    logic [7:0]  n_grp;      // CONV/PW: filter groups of 8; DW/TCONV: channel groups
    logic [7:0]  dil;        // DW: zeros inserted between taps (tap spacing dil+1)
    logic [3:0]  tstride;    // TCONV: stride s
  } cfg1_t;

  typedef struct packed {
    cfg0_t c0;
    cfg1_t c1;
  } layer_cfg_t;

  function automatic logic fp8_is_zero(fp8_t x);
    return x[6:0] == 7'd0;
  endfunction

endpackage
