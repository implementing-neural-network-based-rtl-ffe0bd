// tb_act_coef_mem: checks the activation coefficient memory in its three
// variants (3-segment PWL, 9th-order Taylor, 4-bit LUT).
//  - After reset every variant holds the published sets: the PWL and LUT
//    contents are checked by feeding them to the approximators and comparing
//    with the independent reference (ref_pkg::r_pwl, r_lut) over a sweep of
//    inputs, the Taylor contents field by field against the series
//    coefficients.
//  - Random writes through the port (function bit row[7], entry {row[6:0],
//    col}) are mirrored in a model built from the documented entry map (PWL
//    brk 0..7, slope 8..16, icpt 17..25; Taylor a1..a9 0..4, c0 5, bound 6,
//    lo 7, hi 8; LUT entry k); after each write, one cycle later, all outputs
//    must equal the model, so a write must land in exactly one field of one
//    function.  Writes past the last entry must change nothing.
module tb_act_coef_mem;
  import nn_pkg::*;
  import ref_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic we = 0;
  logic [7:0] row = '0;
  logic [6:0] col = '0;
  fx_t data = '0;

  act_coef_t cp [2], ct [2], cl [2];
  fx_t [15:0] lp [2], lt [2], ll [2];

  act_coef_mem #(.APPROX(APPROX_PWL), .NSEG(3))    u_p (.clk, .rst_n, .we, .row, .col, .data, .coef(cp), .lut(lp));
  act_coef_mem #(.APPROX(APPROX_TAYLOR), .ORDER(9)) u_t (.clk, .rst_n, .we, .row, .col, .data, .coef(ct), .lut(lt));
  act_coef_mem #(.APPROX(APPROX_LUT), .LUT_BITS(4)) u_l (.clk, .rst_n, .we, .row, .col, .data, .coef(cl), .lut(ll));

  // approximators fed from the memories after reset
  fx_t x;
  fx_t yp [2], yl [2];
  logic [3:0] seg [2];
  logic [3:0] idx [2];
  for (genvar f = 0; f < 2; f++) begin : g_f
    act_pwl #(.NSEG(3)) u_pwl (.x, .brk(cp[f].pwl.brk), .slope(cp[f].pwl.slope), .icpt(cp[f].pwl.icpt),
                               .y(yp[f]), .seg(seg[f]));
    act_lut #(.BITS(4)) u_lut (.x, .table_y(ll[f]), .y(yl[f]), .idx(idx[f]));
  end

  int checks = 0, failures = 0;
  int m_pwl [2][26], m_tay [2][9], m_lut [2][16];

  function automatic void compare();
    for (int f = 0; f < 2; f++) begin
      for (int i = 0; i < 8; i++) begin checks++; if (cp[f].pwl.brk[i]   !== m_pwl[f][i])      failures++; end
      for (int i = 0; i < 9; i++) begin checks++; if (cp[f].pwl.slope[i] !== m_pwl[f][8 + i])  failures++; end
      for (int i = 0; i < 9; i++) begin checks++; if (cp[f].pwl.icpt[i]  !== m_pwl[f][17 + i]) failures++; end
      for (int i = 0; i < 5; i++) begin checks++; if (ct[f].tay.a[i] !== m_tay[f][i]) failures++; end
      checks += 4;
      if (ct[f].tay.c0    !== m_tay[f][5]) failures++;
      if (ct[f].tay.bound !== m_tay[f][6]) failures++;
      if (ct[f].tay.lo    !== m_tay[f][7]) failures++;
      if (ct[f].tay.hi    !== m_tay[f][8]) failures++;
      for (int k = 0; k < 16; k++) begin checks++; if (ll[f][k] !== m_lut[f][k]) failures++; end
    end
  endfunction

  task automatic wr(int r, int c, int d);
    @(negedge clk);
    we = 1'b1; row = 8'(r); col = 7'(c); data = d;
    @(negedge clk);
    we = 1'b0;
  endtask

  initial begin
    int ri, e, r, c, d, ent;
    real ta [5], sa [5];
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    // reset contents, PWL and LUT through the approximators
    for (int i = -700; i <= 700; i += 3) begin
      x = i * 512;  #1;
      for (int f = 0; f < 2; f++) begin
        checks += 2;
        if (yp[f] !== r_pwl(f[0], 3, x, ri)) failures++;
        if (yl[f] !== r_lut(f[0], 4, x, e)) failures++;
      end
    end
    // reset contents, Taylor
    ta = '{1.0, -1.0/3.0, 2.0/15.0, -17.0/315.0, 62.0/2835.0};
    sa = '{0.25, -1.0/48.0, 1.0/480.0, -17.0/80640.0, 31.0/1451520.0};
    for (int i = 0; i < 5; i++) begin
      checks += 2;
      if (ct[1].tay.a[i] !== r_fx(ta[i])) failures++;
      if (ct[0].tay.a[i] !== r_fx(sa[i])) failures++;
    end
    checks += 6;
    if (ct[1].tay.c0 !== 0 || ct[0].tay.c0 !== r_fx(0.5)) failures++;
    if (ct[1].tay.lo !== r_fx(-1.0) || ct[0].tay.lo !== 0) failures++;
    if (ct[1].tay.hi !== r_fx(1.0) || ct[0].tay.hi !== r_fx(1.0)) failures++;
    if (ct[1].tay.bound <= 0 || ct[0].tay.bound <= 0) failures++;
    if (ct[1].tay.bound > r_fx(1.6)) failures++;           // tanh series diverges past pi/2
    if (ct[0].tay.bound > r_fx(3.2)) failures++;           // sigmoid series: twice that
    // model starts from the reset contents
    for (int f = 0; f < 2; f++) begin
      for (int i = 0; i < 8; i++) m_pwl[f][i] = cp[f].pwl.brk[i];
      for (int i = 0; i < 9; i++) begin m_pwl[f][8 + i] = cp[f].pwl.slope[i]; m_pwl[f][17 + i] = cp[f].pwl.icpt[i]; end
      for (int i = 0; i < 5; i++) m_tay[f][i] = ct[f].tay.a[i];
      m_tay[f][5] = ct[f].tay.c0;  m_tay[f][6] = ct[f].tay.bound;
      m_tay[f][7] = ct[f].tay.lo;  m_tay[f][8] = ct[f].tay.hi;
      for (int k = 0; k < 16; k++) m_lut[f][k] = ll[f][k];
    end
    compare();
    // random writes, every entry of both functions, plus out-of-range ones
    for (int n = 0; n < 400; n++) begin
      int fn;
      fn  = $urandom_range(0, 1);
      ent = (n % 10 == 9) ? $urandom_range(26, 300) : $urandom_range(0, 25);
      d   = $urandom;
      r   = (fn << 7) | (ent >> 7);
      c   = ent % 128;
      wr(r, c, d);
      if (ent < 26) m_pwl[fn][ent] = d;
      if (ent < 9)  m_tay[fn][ent] = d;
      if (ent < 16) m_lut[fn][ent] = d;
      compare();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
