// tb_act_pwl: checks the PWL approximator for 3, 5, 7 and 9 segments, tanh
// and sigmoid, with the published coefficient sets.  Every input is compared
// bit-exactly with the reference model (tables re-entered from the printed
// rows); inputs include every breakpoint and its neighbours, so the closed
// upper end of each segment is tested.  Also checks that every segment is
// reached, and compares one point (3-segment tanh at 0.5) with the
// real-valued formula to within 2 LSB.
module tb_act_pwl;
  import nn_pkg::*;
  import ref_pkg::*;

  int checks = 0, failures = 0;
  fx_t x;
  fx_t y [8];
  logic [3:0] seg [8];
  localparam int NS [4] = '{3, 5, 7, 9};

  for (genvar n = 0; n < 4; n++) begin : g_n
    for (genvar f = 0; f < 2; f++) begin : g_f
      localparam pwl_coef_t C = pwl_coef(f ? FN_TANH : FN_SIGMOID, NS[n]);
      act_pwl #(.NSEG(NS[n])) dut (.x, .brk(C.brk), .slope(C.slope), .icpt(C.icpt),
                                   .y(y[2*n+f]), .seg(seg[2*n+f]));
    end
  end

  task automatic check_x(fx_t xv, ref bit hit [8][9]);
    int e, row;
    x = xv;
    #1;
    for (int n = 0; n < 4; n++)
      for (int f = 0; f < 2; f++) begin
        e = r_pwl(f[0], NS[n], xv, row);
        checks++;
        if (y[2*n+f] !== e) begin
          failures++;
          if (failures < 10) $display("FAIL nseg=%0d tanh=%0d x=%0d y=%0d exp=%0d", NS[n], f, xv, y[2*n+f], e);
        end
        // printed row r counts from the top; the RTL segment counts from the bottom
        checks++;
        if (int'(seg[2*n+f]) != NS[n] - 1 - row) failures++;
        hit[2*n+f][row] = 1'b1;
      end
  endtask

  initial begin
    bit hit [8][9];
    real bps [] = '{-3.4, -3.0, -2.6, -2.2, -2.0, -1.8, -1.7, -1.5, -1.4, -1.1, -0.9, -0.8, -0.5, -0.4, -0.3,
                    0.3, 0.4, 0.5, 0.8, 0.9, 1.1, 1.4, 1.5, 1.7, 1.8, 2.0, 2.2, 2.6, 3.0, 3.4};
    foreach (hit[i, j]) hit[i][j] = 1'b0;
    foreach (bps[i]) for (int d = -1; d <= 1; d++) check_x(r_fx(bps[i]) + d, hit);
    for (int i = 0; i < 3000; i++) check_x(fx_t'($signed($urandom_range(0, 2*5*65536)) - 5*65536), hit);
    check_x(32'sh7fff_ffff, hit);
    check_x(32'sh8000_0000, hit);
    // real-valued sanity: 3-segment tanh 0.90909*x at x = 0.5
    x = r_fx(0.5); #1;
    checks++;
    if ((y[1] - r_fx(0.454545)) > 2 || (y[1] - r_fx(0.454545)) < -2) failures++;
    for (int n = 0; n < 4; n++)
      for (int f = 0; f < 2; f++)
        for (int r = 0; r < NS[n]; r++) begin
          checks++;
          if (!hit[2*n+f][r]) begin failures++; $display("FAIL segment %0d of %0d never hit", r, NS[n]); end
        end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
