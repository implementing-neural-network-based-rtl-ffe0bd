// lstm_elementwise: Stage 3 of the LSTM cell, the element-wise module.
//
// For every hidden unit j it forms the new cell state and hidden state
//   c_t = f ⊙ c_(t-1) + i ⊙ c~ ,   h_t = o ⊙ tanh(c_t)
// from the gate buffers (order i, f, o, c~) and the stored previous cell
// state.  The tanh of c_t uses the same approximation as Stage 2 (the
// published structure shows tanh inside the cell but no separate unit for
// it; placing it here is this implementation's choice).  Its coefficients
// (coef_tanh, lut_tanh) come from the shared coefficient memory.
//
// Timing: two register stages.  valid_in (gate and c_prev stable) -> c_t
// registered after one cycle, h_t and valid_out after two.  c and h hold their
// values until the next valid_in.
module lstm_elementwise
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
  input  act_coef_t coef_tanh,
  input  fx_t [(1<<LUT_BITS)-1:0] lut_tanh,
  input  fx_t  gate   [4*NH_P],
  input  fx_t  c_prev [NH_P],
  output fx_t  c      [NH_P],
  output fx_t  h      [NH_P],
  output logic valid_out
);

  fx_t  o_q [NH_P];
  fx_t  tc  [NH_P];
  logic v1;

  for (genvar j = 0; j < NH_P; j++) begin : g_tanh
    act_func #(.APPROX(APPROX), .NSEG(NSEG), .ORDER(ORDER), .LUT_BITS(LUT_BITS))
      u_tanh (.x(c[j]), .coef(coef_tanh), .lut(lut_tanh), .y(tc[j]));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1 <= 1'b0;
      valid_out <= 1'b0;
      for (int j = 0; j < NH_P; j++) begin
        c[j] <= '0;  h[j] <= '0;  o_q[j] <= '0;
      end
    end else begin
      v1        <= valid_in;
      valid_out <= v1;
      if (valid_in)
        for (int j = 0; j < NH_P; j++) begin
          c[j]   <= fx_mul(gate[NH_P + j], c_prev[j]) + fx_mul(gate[j], gate[3*NH_P + j]);
          o_q[j] <= gate[2*NH_P + j];
        end
      if (v1)
        for (int j = 0; j < NH_P; j++) h[j] <= fx_mul(o_q[j], tc[j]);
    end
  end

endmodule
