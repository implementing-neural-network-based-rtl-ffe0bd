// act_pwl: piecewise-linear (PWL) activation-function approximator.
//
// The "logic box" of the activation study: it takes the argument x and a
// coefficient set (breakpoints, slopes, intercepts) and returns
// y = slope[s]*x + icpt[s], where s is the segment holding x.  The segment is
// found by counting the breakpoints that x exceeds, so segment s covers
// brk[s-1] < x <= brk[s], the same open/closed ends as the published PWL
// tables.  With the coefficients of nn_pkg::pwl_coef() it realises the
// published 3-, 5-, 7- and 9-segment tanh and sigmoid approximations; the
// multiplier-free shift/add variant mentioned in the literature is not used.
//
// Interface: x and the coefficients in, y and the chosen segment index out.
// Timing: purely combinational; the instantiating stage registers the result.
module act_pwl
  import nn_pkg::*;
#(
  parameter int NSEG = 3        // 3, 5, 7 or 9 segments
) (
  input  fx_t                     x,
  input  fx_t [PWL_MAX-2:0]       brk,
  input  fx_t [PWL_MAX-1:0]       slope,
  input  fx_t [PWL_MAX-1:0]       icpt,
  output fx_t                     y,
  output logic [3:0]              seg
);

  initial assert (NSEG >= 2 && NSEG <= PWL_MAX) else $error("act_pwl: NSEG out of range");

  always_comb begin
    seg = '0;
    for (int i = 0; i < NSEG - 1; i++)
      if (x > brk[i]) seg = seg + 4'd1;
    y = fx_mul(slope[seg], x) + icpt[seg];
  end

endmodule
