// sigmoid_plan: hidden-layer activation G1, a piecewise-linear sigmoid.
//
// Combinational. For |x| (Q16.16) the output is
//   |x| >= 5            : 1
//   2.375 <= |x| < 5     : |x|/32 + 0.84375
//   1 <= |x| < 2.375     : |x|/8  + 0.625
//   0 <= |x| < 1         : |x|/4  + 0.5
// and 1 - y for negative x (the PLAN approximation: all slopes are powers
// of two, so only shifts and adds are needed). The approximation steps down
// by 1/256 at |x| = 2.375, as the original PLAN does. The published design names G1
// but not its form; the sigmoid and this approximation are this design's
// choice.
module sigmoid_plan
  import odl_pkg::*;
(
  input  fxp_t x,
  output fxp_t y
);

  localparam fxp_t C5    = 5 * FXP_ONE;
  localparam fxp_t C2375 = (19 * FXP_ONE) / 8;
  localparam fxp_t C1    = FXP_ONE;

  fxp_t ax, yp;

  always_comb begin
    ax = x[W-1] ? ((x == FXP_MIN) ? FXP_MAX : -x) : x;
    if (ax >= C5)         yp = FXP_ONE;
    else if (ax >= C2375) yp = (ax >>> 5) + ((27 * FXP_ONE) / 32);
    else if (ax >= C1)    yp = (ax >>> 3) + ((5 * FXP_ONE) / 8);
    else                  yp = (ax >>> 2) + (FXP_ONE / 2);
    y = x[W-1] ? (FXP_ONE - yp) : yp;
  end

endmodule
