// tb_lstm_cell: one LSTM direction with NX = 4, NH = 4, 3-segment PWL.
// Runs a sequence of 8 time steps, then clears the state and runs 3 more.
// After every step h_t and c_t are compared with the reference LSTM step
// (which carries h and c from step to step, so the recurrent feedback is
// checked), and done must come NX+NH+5 cycles after step.
module tb_lstm_cell;
  import nn_pkg::*;
  import ref_pkg::*;
  localparam int NXT = 4, NHT = 4, NR = 4*NHT, NC = NXT+NHT;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, w_we = 0, clear = 0, step = 0, busy, done;
  logic [7:0] w_row; logic [6:0] w_col; fx_t w_data;
  fx_t x [NXT], h [NHT], c [NHT];
  int  w [][];
  int  xr [], hr [], cr [];
  always #5 clk = ~clk;

  // published coefficient sets (sigmoid, tanh), as the coefficient memory holds after reset
  act_coef_t coef [2];
  fx_t [15:0] lut [2];
  assign coef[0] = '{pwl: pwl_coef(FN_SIGMOID, 3), tay: taylor_coef(FN_SIGMOID, 9)};
  assign coef[1] = '{pwl: pwl_coef(FN_TANH, 3), tay: taylor_coef(FN_TANH, 9)};
  for (genvar k = 0; k < 16; k++) begin : g_lut
    assign lut[0][k] = lut_entry(FN_SIGMOID, 4, k);
    assign lut[1][k] = lut_entry(FN_TANH, 4, k);
  end
  lstm_cell #(.NH_P(NHT), .NX_P(NXT)) dut (.clk, .rst_n, .w_we, .w_row, .w_col, .w_data, .coef, .lut,
    .clear, .step, .x, .h, .c, .busy, .done);

  task automatic run_step();
    int cyc;
    for (int k = 0; k < NXT; k++) begin
      x[k] = $signed($urandom_range(0, 2*65536)) - 65536;
      xr[k] = x[k];
    end
    r_lstm_step(NXT, NHT, 0, 3, 0, 0, w, xr, hr, cr);
    step = 1;
    @(negedge clk);
    step = 0;
    cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    checks++;
    if (cyc != NC + 5) begin failures++; $display("FAIL latency %0d", cyc); end
    for (int j = 0; j < NHT; j++) begin
      checks += 2;
      if (h[j] !== hr[j]) begin failures++; if (failures < 10) $display("FAIL h[%0d] %0d %0d", j, h[j], hr[j]); end
      if (c[j] !== cr[j]) failures++;
    end
  endtask

  initial begin
    w = new[NC+1];
    foreach (w[k]) w[k] = new[NR];
    xr = new[NXT]; hr = new[NHT]; cr = new[NHT];
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int k = 0; k <= NC; k++)
      for (int r = 0; r < NR; r++) begin
        w[k][r] = $signed($urandom_range(0, 2*65536)) - 65536;
        @(negedge clk);
        w_we = 1; w_row = 8'(r); w_col = 7'(k); w_data = w[k][r];
      end
    @(negedge clk); w_we = 0;
    foreach (hr[j]) begin hr[j] = 0; cr[j] = 0; end
    for (int s = 0; s < 8; s++) run_step();
    clear = 1; @(negedge clk); clear = 0;
    foreach (hr[j]) begin hr[j] = 0; cr[j] = 0; end
    for (int s = 0; s < 3; s++) run_step();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
