// tb_act_taylor: checks the Taylor approximator (orders 3 and 9, tanh and
// sigmoid).  Outputs are compared with the real-valued truncated series
// within 8 LSB plus the error of the 16-bit
// rounded coefficients, bit-exactly with the fixed-point Horner model, and the clamped regions (|x| beyond the bound) exactly.
module tb_act_taylor;
  import nn_pkg::*;
  import ref_pkg::*;

  int checks = 0, failures = 0, clamps = 0;
  fx_t x;
  fx_t y [4];
  localparam int OR [2] = '{3, 9};

  for (genvar n = 0; n < 2; n++) begin : g_n
    for (genvar f = 0; f < 2; f++) begin : g_f
      localparam taylor_coef_t C = taylor_coef(f ? FN_TANH : FN_SIGMOID, OR[n]);
      act_taylor #(.ORDER(OR[n])) dut (.x, .coef(C), .y(y[2*n+f]));
    end
  end

  initial begin
    real e, d, xr, tol;
    for (int i = 0; i < 4000; i++) begin
      x = fx_t'($signed($urandom_range(0, 2*3*65536)) - 3*65536);
      #1;
      xr = r_real(x);
      for (int n = 0; n < 2; n++)
        for (int f = 0; f < 2; f++) begin
          e = r_taylor_real(f[0], OR[n], xr);
          d = r_real(y[2*n+f]) - e;
          // tolerance: 8 LSB of rounding plus the 0.5 LSB coefficient
          // quantisation of each term, which grows with |x|^(2i+1)
          tol = 8.0 / 65536.0;
          for (int i = 0; 2 * i + 1 <= OR[n]; i++) tol += 2.0 / 65536.0 * ($pow((xr < 0 ? -xr : xr), 2 * i + 1) + 1.0);
          // bit-exact against the fixed-point Horner model
          checks++;
          if (y[2*n+f] !== r_act(1, f[0], 0, OR[n], 0, x)) failures++;
          checks++;
          if (d > tol || d < -tol) begin
            failures++;
            if (failures < 10) $display("FAIL order=%0d tanh=%0d x=%f y=%f exp=%f", OR[n], f, xr, r_real(y[2*n+f]), e);
          end
          if ((f == 1 && (xr > 1.0 || xr < -1.0)) || (f == 0 && (xr > 2.0 || xr < -2.0))) clamps++;
        end
    end
    // exact clamp values
    x = r_fx(2.5); #1;
    checks += 2; if (y[3] !== r_fx(1.0)) failures++; if (y[2] !== r_fx(1.0)) failures++;
    x = r_fx(-2.5); #1;
    checks += 2; if (y[3] !== r_fx(-1.0)) failures++; if (y[2] !== 0) failures++;
    // sigmoid(0) = 0.5, tanh(0) = 0
    x = 0; #1;
    checks += 2; if (y[2] !== r_fx(0.5)) failures++; if (y[3] !== 0) failures++;
    checks++; if (clamps == 0) failures++;
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
