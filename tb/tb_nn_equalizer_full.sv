// tb_nn_equalizer_full: the equalizer at its full published size, with no
// parameter overridden: 81-symbol windows of 4 features, 35 hidden units per
// LSTM direction, a 2-filter 21-tap output layer, 61 outputs, 3-segment PWL
// activations.  Loads random weights (all 11,662 words) and two random
// 16QAM-like windows through the load port, runs both windows and compares
// all 2 x 122 outputs bit-exactly with the reference model; checks the
// window latency of NSYM*(NX+NH+7) + NOUT*NK + 4 = 5,011 cycles and counts
// the recurrent steps of both directions and the PWL segments used.
module tb_nn_equalizer_full;
  import nn_pkg::*;
  import ref_pkg::*;
  localparam int NS = NSYM, NHT = NH, NKT = NK, NWIN = 2, WSCALE = 49152;
  localparam approx_e APPROX = APPROX_PWL;
  localparam int NSEG = 3, ORDER = 9, BITS = 4;
  logic clk = 0;
  always #5 clk = ~clk;
  logic finished;
  int checks, failures, n_fwd_steps, n_bwd_steps, n_windows;
  localparam int NO = NS - NKT + 1, NC = NX + NHT;
  logic rst_n = 0, start = 0, busy, done;
  cfg_wr_t cfg;
  fx_t y [NO][NF];

  nn_equalizer_top dut (.clk, .rst_n, .cfg, .start, .busy, .done, .y);

  always @(posedge clk) begin
    if (rst_n && dut.u_bilstm.done_f) n_fwd_steps++;
    if (rst_n && dut.u_bilstm.done_b) n_bwd_steps++;
  end

  task automatic wr(cfg_sel_e sel, int row, int col, int d);
    @(negedge clk);
    cfg.we = 1'b1; cfg.sel = sel; cfg.row = 8'(row); cfg.col = 7'(col); cfg.data = d;
  endtask

  function automatic int rnd(int mag);
    return $signed($urandom_range(0, 2*mag)) - mag;
  endfunction

  initial begin
    int wf[][], wb[][], wc[][][], bc[], x[][], ye[][];
    int cyc;
    finished = 0; checks = 0; failures = 0; n_fwd_steps = 0; n_bwd_steps = 0; n_windows = 0;
    cfg = '0;
    wf = new[NC+1]; wb = new[NC+1];
    foreach (wf[k]) begin wf[k] = new[4*NHT]; wb[k] = new[4*NHT]; end
    wc = new[NF];
    foreach (wc[f]) begin wc[f] = new[NKT]; foreach (wc[f][k]) wc[f][k] = new[2*NHT]; end
    bc = new[NF];
    x = new[NS];
    foreach (x[s]) x[s] = new[NX];
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int k = 0; k <= NC; k++)
      for (int r = 0; r < 4*NHT; r++) begin
        wf[k][r] = rnd(WSCALE);  wr(SEL_LSTM_FWD, r, k, wf[k][r]);
        wb[k][r] = rnd(WSCALE);  wr(SEL_LSTM_BWD, r, k, wb[k][r]);
      end
    for (int f = 0; f < NF; f++) begin
      for (int k = 0; k < NKT; k++)
        for (int ch = 0; ch < 2*NHT; ch++) begin
          wc[f][k][ch] = rnd(WSCALE / 4);  wr(SEL_CONV, f*NKT + k, ch, wc[f][k][ch]);
        end
      bc[f] = rnd(WSCALE / 4);  wr(SEL_CONV, NF*NKT, f, bc[f]);
    end
    for (int win = 0; win < NWIN; win++) begin
      // 16QAM-like soft symbols: levels +-1, +-3 scaled by 1/3 plus noise
      foreach (x[s]) foreach (x[s][k]) begin
        x[s][k] = (2 * $signed($urandom_range(0, 3)) - 3) * 21845 + rnd(6000);
        wr(SEL_INPUT, s, k, x[s][k]);
      end
      @(negedge clk); cfg.we = 1'b0;
      r_equalize(NS, NX, NHT, NKT, NF, int'(APPROX), NSEG, ORDER, BITS, wf, wb, wc, bc, x, ye);
      start = 1; @(negedge clk); start = 0;
      cyc = 1;
      while (!done) begin @(negedge clk); cyc++; end
      n_windows++;
      checks++;
      if (cyc != NS * (NC + 7) + NO * NKT + 4) begin
        failures++; $display("FAIL window latency %0d", cyc);
      end
      for (int j = 0; j < NO; j++)
        for (int f = 0; f < NF; f++) begin
          checks++;
          if (y[j][f] !== ye[j][f]) begin
            failures++;
            if (failures < 10) $display("FAIL approx=%0d y[%0d][%0d]=%0d exp %0d", APPROX, j, f, y[j][f], ye[j][f]);
          end
        end
    end
    checks++;
    if (n_fwd_steps != NWIN * NS || n_bwd_steps != NWIN * NS) begin
      failures++; $display("FAIL step counts %0d %0d", n_fwd_steps, n_bwd_steps);
    end
    checks++;
    if (n_sat_hi == 0 || n_sat_lo == 0 || n_slope == 0) begin
      failures++; $display("FAIL PWL regions upper=%0d lower=%0d sloped=%0d", n_sat_hi, n_sat_lo, n_slope);
    end
    $display("windows=%0d fwd_steps=%0d bwd_steps=%0d PWL upper=%0d lower=%0d sloped=%0d",
             n_windows, n_fwd_steps, n_bwd_steps, n_sat_hi, n_sat_lo, n_slope);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
