// act_lut: look-up-table activation-function approximator.
//
// The input range [-XR, +XR] holds 2^BITS evenly spaced quantisation levels
// x_k = -XR + k*step, step = 2*XR/(2^BITS-1).  The unit maps x to the nearest
// level, k = floor((x+XR)/step + 1/2) clamped to 0..2^BITS-1, and returns the
// stored value f(x_k).  Because XR is a power of two (2^XR_LOG2) the division
// by step reduces to a multiplication by (2^BITS-1) and a shift:
// k = ((x+XR)*(2^BITS-1) + XR) >> (FRAC + XR_LOG2 + 1).
// The table itself is an input, as in the published logic-box model where the
// quantisation levels are read from memory; nn_pkg::lut_entry() generates it.
// Equal x-spacing of the levels follows the published study; XR = 4.0 is
// this implementation's choice.
//
// Interface: x and table in, y and the selected level index out.
// Timing: combinational.
module act_lut
  import nn_pkg::*;
#(
  parameter int BITS    = 4,               // address bits of the table
  parameter int XR_LOG2 = LUT_XR_LOG2      // XR = 2^XR_LOG2
) (
  input  fx_t                   x,
  input  fx_t [(1<<BITS)-1:0]   table_y,
  output fx_t                   y,
  output logic [BITS-1:0]       idx
);

  localparam int SH = FRAC + XR_LOG2 + 1;
  localparam logic signed [63:0] XR_FX = 64'sd1 <<< (FRAC + XR_LOG2);
  localparam logic signed [63:0] NLEV1 = (64'sd1 <<< BITS) - 1;

  logic signed [63:0] t;

  always_comb begin
    t = ((64'(x) + XR_FX) * NLEV1 + XR_FX) >>> SH;
    if (t < 0)           idx = '0;
    else if (t > NLEV1)  idx = '1;
    else                 idx = t[BITS-1:0];
    y = table_y[idx];
  end

endmodule
