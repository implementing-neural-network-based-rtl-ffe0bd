// lstm_cell: one direction of the LSTM layer, built as the three-stage system
// structure of the published design.
//
//   Stage 1 lstm_mm          -> result-of-MM buffer (its accumulators)
//   Stage 2 act_stage        -> gate buffers i, f, o, c~
//   Stage 3 lstm_elementwise -> h_t, c_t
//
// The cell keeps h_(t-1) and c_(t-1) in state registers and feeds them back
// to Stage 1 and Stage 3 of the next time step (the recurrent connections).
// Because h_t is needed before the next product can start, the three stages
// of one step cannot overlap with those of the next; the cell processes one
// time step at a time.  clear zeroes h and c at the start of a sequence.
//
// Timing: step (one cycle, x stable) -> done pulses NX+NH+5 cycles later with
// h = h_t and c = c_t; these stay until the next step.  Neither step nor clear
// may be raised while busy.
module lstm_cell
  import nn_pkg::*;
#(
  parameter int      NH_P     = NH,
  parameter int      NX_P     = NX,
  parameter approx_e APPROX   = APPROX_PWL,
  parameter int      NSEG     = 3,
  parameter int      ORDER    = 9,
  parameter int      LUT_BITS = 4
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        w_we,
  input  logic [7:0]  w_row,
  input  logic [6:0]  w_col,
  input  fx_t         w_data,
  input  act_coef_t   coef [2],              // coefficient sets, indexed by func_e
  input  fx_t [(1<<LUT_BITS)-1:0] lut [2],   // LUT tables, indexed by func_e
  input  logic        clear,
  input  logic        step,
  input  fx_t         x [NX_P],
  output fx_t         h [NH_P],
  output fx_t         c [NH_P],
  output logic        busy,
  output logic        done
);

  fx_t  pre  [4*NH_P];
  fx_t  gate [4*NH_P];
  fx_t  c_new [NH_P];
  fx_t  h_new [NH_P];
  logic mm_busy, mm_done, act_done, ew_done;
  logic in_flight;

  lstm_mm #(.NH_P(NH_P), .NX_P(NX_P)) u_mm (
    .clk, .rst_n, .w_we, .w_row, .w_col, .w_data,
    .start(step), .x, .h, .pre, .busy(mm_busy), .done(mm_done));

  act_stage #(.NH_P(NH_P), .APPROX(APPROX), .NSEG(NSEG), .ORDER(ORDER), .LUT_BITS(LUT_BITS)) u_act (
    .clk, .rst_n, .valid_in(mm_done), .coef, .lut, .pre, .gate, .valid_out(act_done));

  lstm_elementwise #(.NH_P(NH_P), .APPROX(APPROX), .NSEG(NSEG), .ORDER(ORDER), .LUT_BITS(LUT_BITS)) u_ew (
    .clk, .rst_n, .valid_in(act_done), .coef_tanh(coef[FN_TANH]), .lut_tanh(lut[FN_TANH]), .gate, .c_prev(c), .c(c_new), .h(h_new), .valid_out(ew_done));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      in_flight <= 1'b0;
      done      <= 1'b0;
      for (int j = 0; j < NH_P; j++) begin
        h[j] <= '0;  c[j] <= '0;
      end
    end else begin
      done <= ew_done;
      if (step) in_flight <= 1'b1;
      if (ew_done) begin
        in_flight <= 1'b0;
        h <= h_new;
        c <= c_new;
      end
      if (clear)
        for (int j = 0; j < NH_P; j++) begin
          h[j] <= '0;  c[j] <= '0;
        end
    end
  end

  assign busy = in_flight;

  a_step_idle:  assert property (@(posedge clk) disable iff (!rst_n) step  |-> !busy);
  a_clear_idle: assert property (@(posedge clk) disable iff (!rst_n) clear |-> !busy);

endmodule
