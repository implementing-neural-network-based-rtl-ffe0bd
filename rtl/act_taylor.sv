// act_taylor: Taylor-series activation-function approximator.
//
// Evaluates the odd Taylor polynomial of tanh or sigmoid up to order 9 in
// Horner form over x^2:  y = c0 + x*(a1 + x^2*(a3 + x^2*(a5 + x^2*(a7 +
// x^2*a9)))).  Outside (-bound, bound) the polynomial diverges, so the output
// is forced to lo (x < -bound) or hi (x > bound), as the published method does
// with -1/+1 for tanh and 0/+1 for sigmoid.  Coefficients of unused orders are
// zero (nn_pkg::taylor_coef), so ORDER only removes the multipliers that
// would multiply by zero.  The two clamp bounds are inputs; their published
// values came from a grid search and are not known, see nn_pkg.
//
// Interface: x and coefficient set in, y out.  Timing: combinational.
module act_taylor
  import nn_pkg::*;
#(
  parameter int ORDER = 9       // highest odd power: 1, 3, 5, 7 or 9
) (
  input  fx_t          x,
  input  taylor_coef_t coef,
  output fx_t          y
);

  localparam int NTERM = (ORDER + 1) / 2;   // number of odd powers used

  initial assert (ORDER >= 1 && ORDER <= 9 && ORDER % 2 == 1) else $error("act_taylor: ORDER must be odd, 1..9");

  fx_t x2, acc;

  always_comb begin
    x2  = fx_mul(x, x);
    acc = coef.a[NTERM-1];
    for (int i = NTERM - 2; i >= 0; i--)
      acc = coef.a[i] + fx_mul(x2, acc);
    if (x > coef.bound)       y = coef.hi;
    else if (x < -coef.bound) y = coef.lo;
    else                      y = coef.c0 + fx_mul(x, acc);
  end

endmodule
