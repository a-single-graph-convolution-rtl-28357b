// activation_unit: the elementwise activation functions of the model, applied
// to one vector (LANES numbers) per cycle, purely combinational.
//
//   FN_RELU    y = max(x, 0)        after the first fully connected layer
//   FN_SIGMOID y = sigmoid(x)       after the graph convolution and on the
//                                   batch-wise attention scores
//
// The paper names ReLU and sigmoid but not how the sigmoid is evaluated. Here
// it is the piecewise-linear PLAN approximation, whose slopes are powers of
// two, so it needs only shifts and adds (error below 0.02):
//   |x| >= 5        : 1
//   2.375 <= |x| < 5: |x|/32 + 0.84375
//   1 <= |x| < 2.375: |x|/8  + 0.625
//   |x| < 1         : |x|/4  + 0.5
//   and 1 - y for negative x. Requires FRAC >= 5.
//   FN_EXP     y = exp(x)           numerator of the output softmax
// The exponential is evaluated as 2^(x*log2 e): the product t (16 fraction
// bits) splits into an integer part, which becomes a shift, and a fraction
// f, for which 2^f ~ 1 + 0.6565 f + 0.3435 f^2 (error below 0.2 %). Results
// above the number range saturate. The softmax is fed x - max(x) <= 0, so
// its inputs stay in range. This evaluation scheme is this design's choice.
// Any other fn value passes x through unchanged.
module activation_unit
  import gecco_pkg::*;
(
  input  fn_e  fn,
  input  vec_t x,
  output vec_t y
);

  localparam int unsigned F = FRAC;
  localparam int signed ONE    = 1 << F;
  localparam int signed T5     = 5 << F;
  localparam int signed T2375  = 19 << (F - 3);
  localparam int signed C84375 = 27 << (F - 5);
  localparam int signed C625   = 5 << (F - 3);
  localparam int signed HALF   = 1 << (F - 1);

  function automatic data_t sigmoid_plan(input data_t v);
    int signed ax, r;
    ax = (v < 0) ? -int'(v) : int'(v);
    if (ax >= T5)         r = ONE;
    else if (ax >= T2375) r = (ax >>> 5) + C84375;
    else if (ax >= ONE)   r = (ax >>> 3) + C625;
    else                  r = (ax >>> 2) + HALF;
    if (v < 0) r = ONE - r;
    return data_t'(r);
  endfunction

  localparam longint LOG2E_Q16 = 94548;   // log2(e) * 2^16
  localparam longint C1_Q16    = 43024;   // 0.6565 * 2^16
  localparam longint C2_Q16    = 22512;   // 0.3435 * 2^16

  function automatic data_t exp_pow2(input data_t v);
    longint t, ip, f, poly, r;
    int     sh;
    t    = (longint'(v) * LOG2E_Q16) >>> F;
    ip   = t >>> 16;
    f    = t & 64'hFFFF;
    poly = 64'd65536 + ((f * C1_Q16) >>> 16) + ((((f * f) >>> 16) * C2_Q16) >>> 16);
    sh   = 16 - int'(F) - int'(ip);
    if (sh <= -16)     r = longint'(DATA_MAX);
    else if (sh <= 0)  r = poly <<< (-sh);
    else if (sh >= 62) r = 0;
    else               r = poly >>> sh;
    if (r > longint'(DATA_MAX)) r = longint'(DATA_MAX);
    return data_t'(r);
  endfunction

  always_comb begin
    for (int l = 0; l < int'(LANES); l++) begin
      case (fn)
        FN_RELU:    y[l] = (x[l] < 0) ? '0 : x[l];
        FN_SIGMOID: y[l] = sigmoid_plan(x[l]);
        FN_EXP:     y[l] = exp_pow2(x[l]);
        default:    y[l] = x[l];
      endcase
    end
  end

endmodule
