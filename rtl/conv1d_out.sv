// conv1d_out: the output layer, a linear 1-D convolution.
//
// NF filters (XI and XQ of the recovered polarisation) of NK taps run over
// the [NSYM, NCH] hidden-state sequence without padding, giving NOUT =
// NSYM-NK+1 outputs per filter:
//   y[j][f] = b[f] + sum_{k<NK} sum_{ch<NCH} w[f][k][ch] * hs[j+k][ch].
// The unit reads one concatenated hidden-state row per cycle (row j+k) and
// multiplies it with tap k of both filters in NF*NCH parallel multipliers and
// an adder tree; one output pair is finished every NK cycles.  The results
// are kept in the output register array y.  The order of the loops and the
// degree of parallelism are this implementation's choices.
//
// Weights are written through the w_* port: row = f*NK+k, col = channel;
// row NF*NK with col = f writes bias b[f].
// Timing: start (one cycle) -> done pulses NOUT*NK+2 cycles later; y is
// valid from then until the next start.
module conv1d_out
  import nn_pkg::*;
#(
  parameter int NSYM_P = NSYM,
  parameter int NCH    = 2 * NH,
  parameter int NF_P   = NF,
  parameter int NK_P   = NK
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        w_we,
  input  logic [7:0]  w_row,
  input  logic [6:0]  w_col,
  input  fx_t         w_data,
  input  logic        start,
  output logic        busy,
  output logic        done,
  output logic [$clog2(NSYM_P)-1:0] hs_raddr,
  input  fx_t         hs_rdata [NCH],
  output fx_t         y [NSYM_P-NK_P+1][NF_P]
);

  localparam int NOUT_P = NSYM_P - NK_P + 1;
  localparam int JW = $clog2(NOUT_P);
  localparam int KW = $clog2(NK_P);

  fx_t wmem [NF_P][NK_P][NCH];
  fx_t bmem [NF_P];

  logic [JW-1:0] j, j_d;
  logic [KW-1:0] k, k_d;
  logic          issue, rd_v;      // address issued / data returned
  fx_t           acc [NF_P];
  fx_t           tap_sum [NF_P];

  always_ff @(posedge clk) begin
    if (w_we) begin
      if (int'(w_row) < NF_P * NK_P) wmem[int'(w_row) / NK_P][int'(w_row) % NK_P][w_col] <= w_data;
      else                           bmem[w_col[0]] <= w_data;
    end
  end

  assign hs_raddr = ($clog2(NSYM_P))'(j) + ($clog2(NSYM_P))'(k);

  always_comb begin
    for (int f = 0; f < NF_P; f++) begin
      tap_sum[f] = '0;
      for (int ch = 0; ch < NCH; ch++)
        tap_sum[f] = tap_sum[f] + fx_mul(wmem[f][k_d][ch], hs_rdata[ch]);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      issue <= 1'b0;  rd_v <= 1'b0;  done <= 1'b0;
      j <= '0;  k <= '0;  j_d <= '0;  k_d <= '0;
      for (int f = 0; f < NF_P; f++) acc[f] <= '0;
      for (int o = 0; o < NOUT_P; o++)
        for (int f = 0; f < NF_P; f++) y[o][f] <= '0;
    end else begin
      done <= 1'b0;
      // address generation
      if (start) begin
        issue <= 1'b1;  j <= '0;  k <= '0;
      end else if (issue) begin
        if (int'(k) == NK_P - 1) begin
          k <= '0;
          if (int'(j) == NOUT_P - 1) issue <= 1'b0;
          else                       j <= j + 1'b1;
        end else k <= k + 1'b1;
      end
      // accumulation, one cycle behind the address
      rd_v <= issue && !start;
      j_d  <= j;
      k_d  <= k;
      if (rd_v) begin
        for (int f = 0; f < NF_P; f++) begin
          if (k_d == '0) acc[f] <= bmem[f] + tap_sum[f];
          else           acc[f] <= acc[f] + tap_sum[f];
          if (int'(k_d) == NK_P - 1)
            y[j_d][f] <= ((k_d == '0) ? bmem[f] : acc[f]) + tap_sum[f];
        end
        if (int'(k_d) == NK_P - 1 && int'(j_d) == NOUT_P - 1) done <= 1'b1;
      end
    end
  end

  assign busy = issue || rd_v;

  a_start_idle: assert property (@(posedge clk) disable iff (!rst_n) start |-> !busy);

endmodule
