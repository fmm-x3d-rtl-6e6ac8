// x3d_pkg: number formats and arithmetic shared by the X3D streaming layers.
//
// Every stream in the design carries one 16-bit signed fixed-point word per
// element. Feature maps use Q7.9 (9 fraction bits) and weights use Q6.10
// (10 fraction bits); both formats are the ones chosen by the accuracy study
// of the design. Products of a feature word and a weight word therefore have
// 19 fraction bits and are summed in a wide accumulator before being shifted
// back to Q7.9.
//
// Own choices (not specified by the source design): results are truncated
// (arithmetic shift, i.e. rounding towards minus infinity) and saturated to
// the 16-bit range; the sigmoid uses the shift-and-add piecewise-linear
// "PLAN" approximation; the accumulator is 48 bits wide.
package x3d_pkg;

  localparam int DATA_W  = 16;   // width of every stream word
  localparam int FM_FRAC = 9;    // Q7.9 feature maps
  localparam int W_FRAC  = 10;   // Q6.10 weights
  localparam int ACC_W   = 48;   // convolution / pooling accumulator

  typedef logic signed [DATA_W-1:0] fm_t;
  typedef logic signed [DATA_W-1:0] wt_t;
  typedef logic signed [ACC_W-1:0]  acc_t;

  // Activation layer type (T of the activation layer configuration).
  typedef enum logic [1:0] {
    ACT_RELU    = 2'd0,
    ACT_SIGMOID = 2'd1,
    ACT_SWISH   = 2'd2
  } act_e;

  // Element-wise layer operation (T) ...
  typedef enum logic [0:0] {
    ELT_ADD = 1'b0,
    ELT_MUL = 1'b1
  } elt_op_e;

  // ... and mode (M).
  typedef enum logic [0:0] {
    ELT_NORMAL    = 1'b0,
    ELT_BROADCAST = 1'b1
  } elt_mode_e;

  localparam fm_t FM_MAX = fm_t'(16'sh7FFF);
  localparam fm_t FM_MIN = fm_t'(16'sh8000);

  // Saturate a wide signed value to a 16-bit stream word.
  function automatic fm_t sat_fm(input acc_t v);
    if (v > acc_t'(FM_MAX))      return FM_MAX;
    else if (v < acc_t'(FM_MIN)) return FM_MIN;
    else                         return fm_t'(v);
  endfunction

  // Q7.9 x Q7.9 -> Q7.9 with saturation.
  function automatic fm_t mul_fm(input fm_t a, input fm_t b);
    acc_t p;
    p = acc_t'(a) * acc_t'(b);
    return sat_fm(p >>> FM_FRAC);
  endfunction

  // Q7.9 + Q7.9 -> Q7.9 with saturation.
  function automatic fm_t add_fm(input fm_t a, input fm_t b);
    return sat_fm(acc_t'(a) + acc_t'(b));
  endfunction

  // PLAN sigmoid on Q7.9:  |x| >= 5     : 1
  //                        |x| >= 2.375 : |x|/32 + 0.84375
  //                        |x| >= 1     : |x|/8  + 0.625
  //                        otherwise    : |x|/4  + 0.5
  // and sigmoid(-x) = 1 - sigmoid(x).
  function automatic fm_t sigmoid_fm(input fm_t x);
    logic [DATA_W:0] ax;
    logic [DATA_W:0] y;
    ax = x[DATA_W-1] ? (DATA_W+1)'(-(acc_t'(x))) : (DATA_W+1)'(x);
    if (ax >= 17'd2560)      y = 17'd512;
    else if (ax >= 17'd1216) y = (ax >> 5) + 17'd432;
    else if (ax >= 17'd512)  y = (ax >> 3) + 17'd320;
    else                     y = (ax >> 2) + 17'd256;
    if (x[DATA_W-1]) y = 17'd512 - y;
    return fm_t'(y);
  endfunction

  // Swish: x * sigmoid(x).
  function automatic fm_t swish_fm(input fm_t x);
    return mul_fm(x, sigmoid_fm(x));
  endfunction

  function automatic fm_t relu_fm(input fm_t x);
    return x[DATA_W-1] ? fm_t'(0) : x;
  endfunction

endpackage
