// act_func: one activation-function unit.
//
// Selects at elaboration one of the three approximators (PWL, Taylor, LUT)
// and feeds it the matching part of the coefficient set it receives from the
// coefficient memory (act_coef_mem).  Whether the unit computes a sigmoid or
// a tanh is decided only by which set it is given.  This is the published
// "logic box" that takes x and coefficients and returns the approximation;
// the coefficients of the two approximations not selected arrive on the same
// ports and are left unused on purpose, so that every unit has one interface
// whatever APPROX is.
//
// Interface: x, coef, lut in; y out.  Timing: combinational.
module act_func
  import nn_pkg::*;
#(
  parameter approx_e APPROX   = APPROX_PWL,
  parameter int      NSEG     = 3,
  parameter int      ORDER    = 9,
  parameter int      LUT_BITS = 4
) (
  input  fx_t        x,
  input  act_coef_t  coef,
  input  fx_t [(1<<LUT_BITS)-1:0] lut,
  output fx_t        y
);

  if (APPROX == APPROX_PWL) begin : g_pwl
    logic [3:0] seg;
    act_pwl #(.NSEG(NSEG)) u_pwl (.x(x), .brk(coef.pwl.brk), .slope(coef.pwl.slope),
                                  .icpt(coef.pwl.icpt), .y(y), .seg(seg));
  end else if (APPROX == APPROX_TAYLOR) begin : g_taylor
    act_taylor #(.ORDER(ORDER)) u_taylor (.x(x), .coef(coef.tay), .y(y));
  end else begin : g_lut
    logic [LUT_BITS-1:0] idx;
    act_lut #(.BITS(LUT_BITS)) u_lut (.x(x), .table_y(lut), .y(y), .idx(idx));
  end

endmodule
