// lstm_mm: Stage 1 of the LSTM cell, the matrix-multiplication module.
//
// Computes the pre-activations of the four gates of all NH hidden units,
//   pre[g*NH+j] = b[g*NH+j] + sum_k W'[k][g*NH+j] * v[k],
// where v = {x_t, h_(t-1)} is the NX+NH long input vector and W' holds W
// (columns 0..NX-1) and U (columns NX..NX+NH-1).  Gate order: i, f, o, c~.
// A row of 4*NH multiply-accumulate cells works as a broadcast array: in each
// cycle one element v[k] is sent to every cell together with column k of W',
// so a full product takes NX+NH cycles.  The published design names a
// systolic array for this product without giving its shape; with a single
// input vector in flight, a chained systolic row would only add 4*NH-1
// cycles of skew to every recurrent step, so the input is broadcast here
// (this design's choice).  Every product is rescaled to the
// fixed-point format before it is added (int32 arithmetic with 32-bit wrap).
// The weights live in a column-organised on-chip memory (one column readable
// per cycle, i.e. the array partitioned by column as in the published HLS
// design) written one word at a time through the load port; column NX+NH is
// the bias vector.  The accumulator registers are the "result of MM" buffer.
//
// Timing: start (one cycle) samples x and h; done pulses NX+NH+1 cycles after
// start, when pre holds the result.  pre stays valid until the next start.
// start must not be raised while busy.
module lstm_mm
  import nn_pkg::*;
#(
  parameter int NH_P = NH,
  parameter int NX_P = NX
) (
  input  logic        clk,
  input  logic        rst_n,
  // weight load port
  input  logic        w_we,
  input  logic [7:0]  w_row,
  input  logic [6:0]  w_col,
  input  fx_t         w_data,
  // operation
  input  logic        start,
  input  fx_t         x   [NX_P],
  input  fx_t         h   [NH_P],
  output fx_t         pre [4*NH_P],
  output logic        busy,
  output logic        done
);

  localparam int NROW = 4 * NH_P;
  localparam int NCOL = NX_P + NH_P;

  fx_t wmem [NCOL][NROW];   // W | U, column-organised
  fx_t bmem [NROW];         // bias
  fx_t v    [NCOL];         // sampled {x_t, h_(t-1)}
  logic [$clog2(NCOL)-1:0] k;

  always_ff @(posedge clk) begin
    if (w_we) begin
      if (int'(w_col) < NCOL) wmem[int'(w_col)][w_row] <= w_data;
      else                    bmem[w_row]        <= w_data;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0;
      done <= 1'b0;
      k    <= '0;
      for (int r = 0; r < NROW; r++) pre[r] <= '0;
      for (int c = 0; c < NCOL; c++) v[c] <= '0;
    end else begin
      done <= 1'b0;
      if (start) begin
        busy <= 1'b1;
        k    <= '0;
        for (int c = 0; c < NX_P; c++) v[c]        <= x[c];
        for (int c = 0; c < NH_P; c++) v[NX_P + c] <= h[c];
        for (int r = 0; r < NROW; r++) pre[r]      <= bmem[r];
      end else if (busy) begin
        for (int r = 0; r < NROW; r++) pre[r] <= pre[r] + fx_mul(wmem[k][r], v[k]);
        if (int'(k) == NCOL - 1) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
        k <= k + 1'b1;
      end
    end
  end

  a_no_start_when_busy: assert property (@(posedge clk) disable iff (!rst_n) start |-> !busy);

endmodule
