// eq_harness: drives one nn_equalizer_top end to end.  Loads random weights
// for both LSTM directions and the output layer and NWIN random input windows
// through the load port, runs each window, checks all outputs bit-exactly
// against ref_pkg::r_equalize and the window latency
// NSYM*(NX+NH+7) + NOUT*NK + 4 cycles.  It counts the mechanisms exercised:
// forward and backward LSTM steps, windows run with weights kept loaded,
// and (PWL) activations in the upper, lower and sloped segments.  With
// SWAP_COEF it also reloads the activation coefficient memory through the
// load port, tanh set into the sigmoid slot and sigmoid set into the tanh
// slot (entry map: PWL brk 0..7, slope 8..16, icpt 17..25; Taylor a1..a9
// 0..4, c0 5, bound 6, lo 7, hi 8; LUT entry k), and checks the outputs
// against the reference model run with the functions swapped.
module eq_harness
  import nn_pkg::*;
  import ref_pkg::*;
#(
  parameter int      NS     = 12,
  parameter int      NHT    = 4,
  parameter int      NKT    = 4,
  parameter approx_e APPROX = APPROX_PWL,
  parameter int      NSEG   = 3,
  parameter int      ORDER  = 9,
  parameter int      BITS   = 4,
  parameter int      NWIN   = 2,
  parameter int      WSCALE = 32768,    // weight magnitude, 1.0 = 65536
  parameter bit      SWAP_COEF = 1'b0
) (
  input  logic clk,
  output logic finished,
  output int   checks,
  output int   failures,
  output int   n_fwd_steps,
  output int   n_bwd_steps,
  output int   n_windows,
  output int   n_coef_writes
);
  localparam int NO = NS - NKT + 1, NC = NX + NHT;
  logic rst_n = 0, start = 0, busy, done;
  cfg_wr_t cfg;
  fx_t y [NO][NF];

  nn_equalizer_top #(.NSYM_P(NS), .NH_P(NHT), .NK_P(NKT), .APPROX(APPROX), .NSEG(NSEG),
                     .ORDER(ORDER), .LUT_BITS(BITS)) dut (.clk, .rst_n, .cfg, .start, .busy, .done, .y);

  always @(posedge clk) begin
    if (rst_n && dut.u_bilstm.done_f) n_fwd_steps++;
    if (rst_n && dut.u_bilstm.done_b) n_bwd_steps++;
  end

  task automatic wr(cfg_sel_e sel, int row, int col, int d);
    @(negedge clk);
    cfg.we = 1'b1; cfg.sel = sel; cfg.row = 8'(row); cfg.col = 7'(col); cfg.data = d;
  endtask

  // write the coefficient set of function src into slot dst
  task automatic load_coef(bit dst, bit src);
    pwl_coef_t    p;
    taylor_coef_t t;
    p = pwl_coef(func_e'(src), NSEG);
    t = taylor_coef(func_e'(src), ORDER);
    if (APPROX == APPROX_PWL) begin
      for (int i = 0; i < 8; i++) wr(SEL_ACT, {dst, 7'd0}, i, p.brk[i]);
      for (int i = 0; i < 9; i++) wr(SEL_ACT, {dst, 7'd0}, 8 + i, p.slope[i]);
      for (int i = 0; i < 9; i++) wr(SEL_ACT, {dst, 7'd0}, 17 + i, p.icpt[i]);
      n_coef_writes += 26;
    end else if (APPROX == APPROX_TAYLOR) begin
      for (int i = 0; i < 5; i++) wr(SEL_ACT, {dst, 7'd0}, i, t.a[i]);
      wr(SEL_ACT, {dst, 7'd0}, 5, t.c0);
      wr(SEL_ACT, {dst, 7'd0}, 6, t.bound);
      wr(SEL_ACT, {dst, 7'd0}, 7, t.lo);
      wr(SEL_ACT, {dst, 7'd0}, 8, t.hi);
      n_coef_writes += 9;
    end else begin
      for (int k = 0; k < (1 << BITS); k++) begin
        wr(SEL_ACT, {dst, 7'(k >> 7)}, k % 128, lut_entry(func_e'(src), BITS, k));
        n_coef_writes++;
      end
    end
  endtask

  function automatic int rnd(int mag);
    return $signed($urandom_range(0, 2*mag)) - mag;
  endfunction

  initial begin
    int wf[][], wb[][], wc[][][], bc[], x[][], ye[][];
    int cyc;
    finished = 0; checks = 0; failures = 0; n_fwd_steps = 0; n_bwd_steps = 0; n_windows = 0; n_coef_writes = 0;
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
    if (SWAP_COEF) begin
      load_coef(1'b0, 1'b1);
      load_coef(1'b1, 1'b0);
    end
    for (int win = 0; win < NWIN; win++) begin
      // 16QAM-like soft symbols: levels +-1, +-3 scaled by 1/3 plus noise
      foreach (x[s]) foreach (x[s][k]) begin
        x[s][k] = (2 * $signed($urandom_range(0, 3)) - 3) * 21845 + rnd(6000);
        wr(SEL_INPUT, s, k, x[s][k]);
      end
      @(negedge clk); cfg.we = 1'b0;
      r_equalize(NS, NX, NHT, NKT, NF, int'(APPROX), NSEG, ORDER, BITS, wf, wb, wc, bc, x, ye, SWAP_COEF);
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
    finished = 1;
  end
endmodule
