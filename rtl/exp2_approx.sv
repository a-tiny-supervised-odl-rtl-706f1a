// exp2_approx: the exponential of the output activation G2 (softmax).
//
// Combinational. For a Q16.16 input z <= 0 it returns an approximation of
// e^z: z is scaled by log2(e) to y = z*log2(e), split into an integer part
// k = floor(y) <= 0 and a fraction f in [0,1), and the result is
// (1 + f) >> -k, using 2^f ~ 1 + f. The controller subtracts the largest
// logit before calling it, so inputs are never positive; a positive input
// is treated as zero (result 1). The form of G2 is not given by the
// published design; softmax and this approximation are this design's choice.
module exp2_approx
  import odl_pkg::*;
(
  input  fxp_t z,
  output fxp_t e
);

  localparam fxp_t LOG2E = 32'sd94548;  // log2(e) in Q16.16

  fxp_t       y, f;
  fxp_t       k;       // floor(y), an integer
  logic [W-1:0] sh;

  always_comb begin
    y  = z[W-1] ? fxp_mul(z, LOG2E) : '0;
    k  = y >>> FRAC;
    f  = y - (k <<< FRAC);
    sh = W'(-k);
    if (sh >= W'(W - 1)) e = '0;
    else                 e = (FXP_ONE + f) >>> sh;
  end

endmodule
