// nn_equalizer_top: biLSTM+CNN nonlinear equalizer for one polarisation of a
// coherent receiver.
//
// A window of NSYM = 81 received soft symbols, each with four features (I and
// Q of both polarisations, at one sample per symbol), passes through a
// bidirectional LSTM layer with 35 hidden units per direction and then a
// linear 1-D convolution with 2 filters of 21 taps and no padding, which
// returns the NOUT = 61 central symbols of the window (I and Q of the X
// polarisation) in parallel.  Consecutive windows therefore overlap by 20
// symbols.  All arithmetic is 32-bit fixed point; tanh and sigmoid are
// replaced by a hardware approximation (default: 3-segment PWL).
//
// Blocks: the input buffer (x_win registers), the activation coefficient
// memory (act_coef_mem, shared by all activation units), bilstm_layer (two
// lstm_cell instances and the hidden-state memory), conv1d_out, and the
// output buffer (the y registers of conv1d_out).  A small controller runs the layers in
// sequence.
//
// Interface: cfg is a single write port through which the trained weights of
// both LSTM directions and of the output layer, the activation coefficients
// (optional: they reset to the published sets) and the input window, are
// written (see nn_pkg::cfg_wr_t for the address map).  start (one cycle,
// while not busy) equalizes the window held in the input buffer; done pulses
// when y holds the 61 equalized symbols.  Weights stay loaded across windows.
// Timing: from start to done one window takes NSYM*(NX+NH+7) + NOUT*NK + 4
// cycles: 3,726 + 1,281 + 4 = 5,011 cycles at the default sizes.
module nn_equalizer_top
  import nn_pkg::*;
#(
  parameter int      NSYM_P   = NSYM,
  parameter int      NH_P     = NH,
  parameter int      NK_P     = NK,
  parameter approx_e APPROX   = APPROX_PWL,
  parameter int      NSEG     = 3,
  parameter int      ORDER    = 9,
  parameter int      LUT_BITS = 4
) (
  input  logic    clk,
  input  logic    rst_n,
  input  cfg_wr_t cfg,
  input  logic    start,
  output logic    busy,
  output logic    done,
  output fx_t     y [NSYM_P-NK_P+1][NF]
);

  localparam int AW = $clog2(NSYM_P);

  fx_t  x_win [NSYM_P][NX];
  logic lstm_busy, lstm_done, conv_busy, conv_done;
  logic [AW-1:0] hs_raddr;
  fx_t  hs_rdata [2*NH_P];
  act_coef_t coef [2];
  fx_t [(1<<LUT_BITS)-1:0] lut [2];

  // input buffer
  always_ff @(posedge clk) begin
    if (cfg.we && cfg.sel == SEL_INPUT && int'(cfg.row) < NSYM_P && int'(cfg.col) < NX)
      x_win[cfg.row[AW-1:0]][cfg.col[1:0]] <= cfg.data;
  end

  act_coef_mem #(.APPROX(APPROX), .NSEG(NSEG), .ORDER(ORDER), .LUT_BITS(LUT_BITS)) u_coef (
    .clk, .rst_n, .we(cfg.we && cfg.sel == SEL_ACT), .row(cfg.row), .col(cfg.col), .data(cfg.data),
    .coef, .lut);

  bilstm_layer #(.NSYM_P(NSYM_P), .NH_P(NH_P), .NX_P(NX), .APPROX(APPROX), .NSEG(NSEG),
                 .ORDER(ORDER), .LUT_BITS(LUT_BITS)) u_bilstm (
    .clk, .rst_n,
    .w_we(cfg.we && (cfg.sel == SEL_LSTM_FWD || cfg.sel == SEL_LSTM_BWD)),
    .w_dir(cfg.sel == SEL_LSTM_BWD), .w_row(cfg.row), .w_col(cfg.col), .w_data(cfg.data),
    .coef, .lut,
    .start, .x_win, .busy(lstm_busy), .done(lstm_done), .hs_raddr, .hs_rdata);

  conv1d_out #(.NSYM_P(NSYM_P), .NCH(2*NH_P), .NF_P(NF), .NK_P(NK_P)) u_conv (
    .clk, .rst_n,
    .w_we(cfg.we && cfg.sel == SEL_CONV), .w_row(cfg.row), .w_col(cfg.col), .w_data(cfg.data),
    .start(lstm_done), .busy(conv_busy), .done(conv_done), .hs_raddr, .hs_rdata, .y);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) done <= 1'b0;
    else        done <= conv_done;
  end

  assign busy = lstm_busy || lstm_done || conv_busy || conv_done;

  a_start_idle: assert property (@(posedge clk) disable iff (!rst_n) start |-> !busy);
  a_no_cfg_busy: assert property (@(posedge clk) disable iff (!rst_n) cfg.we |-> !busy);

endmodule
