// act_stage: Stage 2 of the LSTM cell, the activation-function module.
//
// Reads the 4*NH pre-activations from the result-of-MM buffer and writes the
// gate buffers: sigmoid for the input, forget and output gates (rows 0..3*NH-1)
// and tanh for the cell input c~ (rows 3*NH..4*NH-1).  All 4*NH units work in
// parallel.  Which approximation (PWL, Taylor or LUT) and its order are
// parameters; the default, the 3-segment PWL, is the variant the published
// study recommends for hardware.  The coefficients come from the shared
// coefficient memory (act_coef_mem): coef/lut[FN_SIGMOID] for the gates and
// coef/lut[FN_TANH] for c~.
//
// Timing: valid_in (one cycle, pre stable) -> gate registered, valid_out one
// cycle later.  gate holds its value until the next valid_in.
module act_stage
  import nn_pkg::*;
#(
  parameter int      NH_P     = NH,
  parameter approx_e APPROX   = APPROX_PWL,
  parameter int      NSEG     = 3,
  parameter int      ORDER    = 9,
  parameter int      LUT_BITS = 4
) (
  input  logic clk,
  input  logic rst_n,
  input  logic valid_in,
  input  act_coef_t   coef [2],              // coefficient sets, indexed by func_e
  input  fx_t [(1<<LUT_BITS)-1:0] lut [2],   // LUT tables, indexed by func_e
  input  fx_t  pre  [4*NH_P],
  output fx_t  gate [4*NH_P],
  output logic valid_out
);

  fx_t act [4*NH_P];

  for (genvar r = 0; r < 4 * NH_P; r++) begin : g_unit
    localparam func_e FN = (r < 3 * NH_P) ? FN_SIGMOID : FN_TANH;
    act_func #(.APPROX(APPROX), .NSEG(NSEG), .ORDER(ORDER), .LUT_BITS(LUT_BITS))
      u_act (.x(pre[r]), .coef(coef[FN]), .lut(lut[FN]), .y(act[r]));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      valid_out <= 1'b0;
      for (int r = 0; r < 4 * NH_P; r++) gate[r] <= '0;
    end else begin
      valid_out <= valid_in;
      if (valid_in)
        for (int r = 0; r < 4 * NH_P; r++) gate[r] <= act[r];
    end
  end

endmodule
