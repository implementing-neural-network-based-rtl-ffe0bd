// tb_bilstm_layer: bidirectional layer over a 7-symbol window with NH = 3.
// Loads different random weights into the two directions, runs two windows
// and reads back all hidden-state rows through the read port.  Row t must
// hold the forward h after symbol t followed by the backward h after symbol
// t of the reversed pass; the whole layer must take NSYM*(NX+NH+7)+1 cycles.
module tb_bilstm_layer;
  import nn_pkg::*;
  import ref_pkg::*;
  localparam int NS = 7, NXT = 4, NHT = 3, NR = 4*NHT, NC = NXT+NHT;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, w_we = 0, w_dir = 0, start = 0, busy, done;
  logic [7:0] w_row; logic [6:0] w_col; fx_t w_data;
  fx_t x_win [NS][NXT];
  logic [$clog2(NS)-1:0] hs_raddr = '0;
  fx_t hs_rdata [2*NHT];
  int  wf [][], wb [][];
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
  bilstm_layer #(.NSYM_P(NS), .NH_P(NHT), .NX_P(NXT)) dut (.clk, .rst_n, .w_we, .w_dir, .w_row, .w_col, .coef, .lut,
    .w_data, .start, .x_win, .busy, .done, .hs_raddr, .hs_rdata);

  initial begin
    int exp_h [NS][2*NHT];
    int xr [], hr [], cr [];
    int cyc;
    wf = new[NC+1]; wb = new[NC+1];
    foreach (wf[k]) begin wf[k] = new[NR]; wb[k] = new[NR]; end
    xr = new[NXT]; hr = new[NHT]; cr = new[NHT];
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int d = 0; d < 2; d++)
      for (int k = 0; k <= NC; k++)
        for (int r = 0; r < NR; r++) begin
          @(negedge clk);
          w_we = 1; w_dir = d[0]; w_row = 8'(r); w_col = 7'(k);
          w_data = $signed($urandom_range(0, 2*65536)) - 65536;
          if (d == 0) wf[k][r] = w_data; else wb[k][r] = w_data;
        end
    @(negedge clk); w_we = 0;
    for (int win = 0; win < 2; win++) begin
      foreach (x_win[s, k]) x_win[s][k] = $signed($urandom_range(0, 3*65536)) - 3*32768;
      // reference: forward pass, then backward pass over the reversed window
      foreach (hr[j]) begin hr[j] = 0; cr[j] = 0; end
      for (int s = 0; s < NS; s++) begin
        foreach (xr[k]) xr[k] = x_win[s][k];
        r_lstm_step(NXT, NHT, 0, 3, 0, 0, wf, xr, hr, cr);
        for (int j = 0; j < NHT; j++) exp_h[s][j] = hr[j];
      end
      foreach (hr[j]) begin hr[j] = 0; cr[j] = 0; end
      for (int s = NS - 1; s >= 0; s--) begin
        foreach (xr[k]) xr[k] = x_win[s][k];
        r_lstm_step(NXT, NHT, 0, 3, 0, 0, wb, xr, hr, cr);
        for (int j = 0; j < NHT; j++) exp_h[s][NHT+j] = hr[j];
      end
      start = 1; @(negedge clk); start = 0;
      cyc = 1;
      while (!done) begin @(negedge clk); cyc++; end
      checks++;
      if (cyc != NS * (NC + 7) + 1) begin failures++; $display("FAIL latency %0d", cyc); end
      for (int s = 0; s < NS; s++) begin
        hs_raddr = 3'(s);
        @(negedge clk);
        for (int ch = 0; ch < 2*NHT; ch++) begin
          checks++;
          if (hs_rdata[ch] !== exp_h[s][ch]) begin
            failures++;
            if (failures < 10) $display("FAIL row %0d ch %0d: %0d exp %0d", s, ch, hs_rdata[ch], exp_h[s][ch]);
          end
        end
      end
    end
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
