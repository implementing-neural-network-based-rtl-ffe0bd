// tb_act_lut: checks the LUT approximator with 4-bit (16 level) and 8-bit
// tables of tanh and sigmoid.  The expected level index is computed with real
// arithmetic, nearest level over [-4, 4]; outputs must match bit-exactly.
// Inputs include the midpoints between levels and values beyond the range.
module tb_act_lut;
  import nn_pkg::*;
  import ref_pkg::*;

  int checks = 0, failures = 0;
  fx_t x;
  fx_t y4t, y4s, y8t;
  logic [3:0] i4t, i4s;
  logic [7:0] i8t;
  fx_t [15:0]  tab4t, tab4s;
  fx_t [255:0] tab8t;

  always_comb begin
    for (int k = 0; k < 16; k++) begin tab4t[k] = lut_entry(FN_TANH, 4, k); tab4s[k] = lut_entry(FN_SIGMOID, 4, k); end
    for (int k = 0; k < 256; k++) tab8t[k] = lut_entry(FN_TANH, 8, k);
  end

  act_lut #(.BITS(4)) d4t (.x, .table_y(tab4t), .y(y4t), .idx(i4t));
  act_lut #(.BITS(4)) d4s (.x, .table_y(tab4s), .y(y4s), .idx(i4s));
  act_lut #(.BITS(8)) d8t (.x, .table_y(tab8t), .y(y8t), .idx(i8t));

  task automatic chk(fx_t xv);
    int idx, e;
    x = xv; #1;
    e = r_lut(1'b1, 4, xv, idx);
    checks += 2;
    if (y4t !== e || int'(i4t) != idx) begin failures++; if (failures < 10) $display("FAIL 4t x=%0d y=%0d exp=%0d idx=%0d/%0d", xv, y4t, e, i4t, idx); end
    e = r_lut(1'b0, 4, xv, idx);
    if (y4s !== e) failures++;
    e = r_lut(1'b1, 8, xv, idx);
    checks++;
    if (y8t !== e) begin failures++; if (failures < 10) $display("FAIL 8t x=%0d y=%0d exp=%0d", xv, y8t, e); end
  endtask

  initial begin
    real step;
    step = 8.0 / 15.0;
    for (int k = 0; k < 16; k++) begin
      chk(r_fx(-4.0 + (real'(k) + 0.5) * step) - 1);
      chk(r_fx(-4.0 + (real'(k) + 0.5) * step) + 1);
      chk(r_fx(-4.0 + real'(k) * step));
    end
    for (int i = 0; i < 3000; i++) chk(fx_t'($signed($urandom_range(0, 2*6*65536)) - 6*65536));
    chk(r_fx(-100.0));
    chk(r_fx(100.0));
    // fig.: 4-bit tanh table saturates below 1.0 (top level tanh(4))
    x = r_fx(5.0); #1;
    checks++; if (y4t !== r_fx($tanh(4.0))) failures++;
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
