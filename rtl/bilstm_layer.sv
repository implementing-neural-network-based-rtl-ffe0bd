// bilstm_layer: the bidirectional LSTM hidden layer.
//
// A forward and a backward lstm_cell run side by side over the NSYM-symbol
// window: in sequencer step t the forward cell consumes symbol t and the
// backward cell symbol NSYM-1-t.  After each step the two hidden vectors are
// written to the hidden-state memory, forward h to row t, channels 0..NH-1,
// and backward h to row NSYM-1-t, channels NH..2*NH-1, which is the [NSYM, 2*NH]
// concatenation fed to the output layer.  The memory corresponds to the block
// RAM that holds the recurrent states in the published FPGA realisation;
// running both directions at once and the order of the concatenation are this
// implementation's choices.  Both cells start each window with h = c = 0.
//
// Interface: x_win is the input window (held stable while busy); weights
// are loaded per direction through the w_* port (w_dir selects the cell);
// the output layer reads one concatenated row per cycle through hs_raddr /
// hs_rdata (registered read, one cycle latency).
// Timing: start (one cycle) -> done pulses NSYM*(NX+NH+7)+1 cycles later.
module bilstm_layer
  import nn_pkg::*;
#(
  parameter int      NSYM_P   = NSYM,
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
  input  logic        w_dir,        // 0: forward cell, 1: backward cell
  input  logic [7:0]  w_row,
  input  logic [6:0]  w_col,
  input  fx_t         w_data,
  input  act_coef_t   coef [2],              // coefficient sets, indexed by func_e
  input  fx_t [(1<<LUT_BITS)-1:0] lut [2],   // LUT tables, indexed by func_e
  input  logic        start,
  input  fx_t         x_win [NSYM_P][NX_P],
  output logic        busy,
  output logic        done,
  input  logic [$clog2(NSYM_P)-1:0] hs_raddr,
  output fx_t         hs_rdata [2*NH_P]
);

  typedef enum logic [1:0] {S_IDLE, S_CLEAR, S_STEP, S_WAIT} state_e;
  state_e state;

  localparam int TW = $clog2(NSYM_P);
  logic [TW-1:0] t, tb;
  logic step_q, clear_q;
  fx_t  h_f [NH_P], h_b [NH_P], c_f [NH_P], c_b [NH_P];
  logic busy_f, busy_b, done_f, done_b;

  fx_t hs_f [NSYM_P][NH_P];    // forward hidden states
  fx_t hs_b [NSYM_P][NH_P];    // backward hidden states

  assign tb = TW'(NSYM_P - 1) - t;

  lstm_cell #(.NH_P(NH_P), .NX_P(NX_P), .APPROX(APPROX), .NSEG(NSEG), .ORDER(ORDER), .LUT_BITS(LUT_BITS)) u_fwd (
    .clk, .rst_n, .w_we(w_we && !w_dir), .w_row, .w_col, .w_data, .coef, .lut,
    .clear(clear_q), .step(step_q), .x(x_win[t]), .h(h_f), .c(c_f), .busy(busy_f), .done(done_f));

  lstm_cell #(.NH_P(NH_P), .NX_P(NX_P), .APPROX(APPROX), .NSEG(NSEG), .ORDER(ORDER), .LUT_BITS(LUT_BITS)) u_bwd (
    .clk, .rst_n, .w_we(w_we && w_dir), .w_row, .w_col, .w_data, .coef, .lut,
    .clear(clear_q), .step(step_q), .x(x_win[tb]), .h(h_b), .c(c_b), .busy(busy_b), .done(done_b));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      t       <= '0;
      step_q  <= 1'b0;
      clear_q <= 1'b0;
      done    <= 1'b0;
    end else begin
      step_q  <= 1'b0;
      clear_q <= 1'b0;
      done    <= 1'b0;
      case (state)
        S_IDLE: if (start) begin
          t       <= '0;
          clear_q <= 1'b1;
          state   <= S_CLEAR;
        end
        S_CLEAR: begin
          step_q <= 1'b1;
          state  <= S_WAIT;
        end
        S_STEP: begin
          step_q <= 1'b1;
          state  <= S_WAIT;
        end
        S_WAIT: if (done_f) begin
          if (int'(t) == NSYM_P - 1) begin
            done  <= 1'b1;
            state <= S_IDLE;
          end else begin
            t     <= t + 1'b1;
            state <= S_STEP;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // hidden-state memory: written when a step finishes, read by the output layer
  always_ff @(posedge clk) begin
    if (state == S_WAIT && done_f) begin
      hs_f[t]  <= h_f;
      hs_b[tb] <= h_b;
    end
    for (int j = 0; j < NH_P; j++) begin
      hs_rdata[j]        <= hs_f[hs_raddr][j];
      hs_rdata[NH_P + j] <= hs_b[hs_raddr][j];
    end
  end

  assign busy = (state != S_IDLE);

  a_dirs_in_step: assert property (@(posedge clk) disable iff (!rst_n) done_f == done_b);
  a_start_idle:   assert property (@(posedge clk) disable iff (!rst_n) start |-> !busy);

endmodule
