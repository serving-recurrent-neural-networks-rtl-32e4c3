// nonlin: function unit for the LSTM non-linearities, sigma(x) or tanh(x).
//
// Combinational. Input and output are signed 32-bit fixed point with 16
// fractional bits (Q16). The paper does not say how its function units
// evaluate sigma and tanh; this unit uses the piecewise-linear "PLAN"
// approximation of the sigmoid, whose slopes are powers of two so it needs
// only shifts, adds and compares:
//   |x| >= 5          : 1
//   2.375 <= |x| < 5  : |x|/32 + 0.84375
//   1 <= |x| < 2.375  : |x|/8  + 0.625
//   |x| < 1           : |x|/4  + 0.5
//   x < 0             : 1 - sigma(|x|)
// and tanh(x) = 2*sigma(2x) - 1 (x is clamped to +-8 before doubling).
// The maximum error against the exact functions is about 0.019 (sigma) and
// 0.038 (tanh).
module nonlin
  import rnn_pkg::*;
(
  input  act_e               mode,
  input  logic signed [31:0] x,
  output logic signed [31:0] y
);

  localparam logic signed [31:0] ONE = 32'sd65536;

  function automatic logic signed [31:0] plan_sigmoid(input logic signed [31:0] v);
    logic signed [31:0] av, r;
    av = (v == 32'sh8000_0000) ? 32'sh7fff_ffff : (v < 0 ? -v : v);
    if (av >= 32'sd327680)      r = ONE;                        // 5.0
    else if (av >= 32'sd155648) r = (av >>> 5) + 32'sd55296;    // 2.375, 0.84375
    else if (av >= 32'sd65536)  r = (av >>> 3) + 32'sd40960;    // 1.0,   0.625
    else                        r = (av >>> 2) + 32'sd32768;    //        0.5
    return (v < 0) ? ONE - r : r;
  endfunction

  logic signed [31:0] xc;

  always_comb begin
    xc = x;
    if (x > 32'sd524288)       xc = 32'sd524288;   // +8.0
    else if (x < -32'sd524288) xc = -32'sd524288;  // -8.0
    if (mode == ACT_TANH) y = (plan_sigmoid(xc <<< 1) <<< 1) - ONE;
    else                  y = plan_sigmoid(x);
  end

endmodule
