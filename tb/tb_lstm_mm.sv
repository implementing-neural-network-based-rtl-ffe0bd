// tb_lstm_mm: Stage 1 with NX = 4 inputs and NH = 5 hidden units (20 rows,
// 9 columns plus bias).  Loads random weights through the load port and
// checks, for several (x, h) pairs, every pre-activation against the
// reference sum and that done arrives exactly NX+NH+1 cycles after start.
module tb_lstm_mm;
  import nn_pkg::*;
  import ref_pkg::*;
  localparam int NXT = 4, NHT = 5, NR = 4*NHT, NC = NXT+NHT;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, w_we = 0, start = 0, busy, done;
  logic [7:0] w_row; logic [6:0] w_col; fx_t w_data;
  fx_t x [NXT], h [NHT], pre [NR];
  int  w [NC+1][NR];
  always #5 clk = ~clk;

  lstm_mm #(.NH_P(NHT), .NX_P(NXT)) dut (.clk, .rst_n, .w_we, .w_row, .w_col, .w_data,
    .start, .x, .h, .pre, .busy, .done);

  initial begin
    int e, cyc;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int c = 0; c <= NC; c++)
      for (int r = 0; r < NR; r++) begin
        w[c][r] = $signed($urandom_range(0, 65536)) - 32768;
        @(negedge clk);
        w_we = 1; w_row = 8'(r); w_col = 7'(c); w_data = w[c][r];
      end
    @(negedge clk); w_we = 0;
    for (int it = 0; it < 20; it++) begin
      for (int k = 0; k < NXT; k++) x[k] = $signed($urandom_range(0, 4*65536)) - 2*65536;
      for (int k = 0; k < NHT; k++) h[k] = $signed($urandom_range(0, 2*65536)) - 65536;
      start = 1;
      @(negedge clk);
      start = 0;
      // change the inputs: they must have been sampled at start
      for (int k = 0; k < NXT; k++) x[k] = 0;
      cyc = 1;
      while (!done) begin @(negedge clk); cyc++; end
      checks++;
      if (cyc != NC + 1) begin failures++; $display("FAIL latency %0d", cyc); end
    end
    // last iteration's values: recompute with the sampled inputs
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // value check on every done, against the inputs captured at start
  int xs [NXT], hs [NHT];
  always @(posedge clk) if (start) begin
    foreach (xs[k]) xs[k] = x[k];
    foreach (hs[k]) hs[k] = h[k];
  end
  always @(negedge clk) if (done) begin
    int e;
    for (int r = 0; r < NR; r++) begin
      e = w[NC][r];
      for (int k = 0; k < NXT; k++) e += r_mul(w[k][r], xs[k]);
      for (int k = 0; k < NHT; k++) e += r_mul(w[NXT+k][r], hs[k]);
      checks++;
      if (pre[r] !== e) begin failures++; if (failures < 10) $display("FAIL row %0d %0d %0d", r, pre[r], e); end
    end
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
