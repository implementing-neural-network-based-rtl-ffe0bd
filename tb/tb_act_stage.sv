// tb_act_stage: Stage 2 with 3 hidden units (12 gate rows), 3-segment PWL.
// Rows 0..8 (i, f, o) must carry the sigmoid and rows 9..11 (c~) the tanh of
// their pre-activation, one cycle after valid_in; gate must hold otherwise.
module tb_act_stage;
  import nn_pkg::*;
  import ref_pkg::*;
  localparam int N = 3;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, valid_in = 0, valid_out;
  fx_t pre [4*N], gate [4*N];
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
  act_stage #(.NH_P(N)) dut (.clk, .rst_n, .valid_in, .coef, .lut, .pre, .gate, .valid_out);

  initial begin
    int e [4*N];
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int it = 0; it < 200; it++) begin
      @(negedge clk);
      for (int r = 0; r < 4*N; r++) begin
        pre[r] = fx_t'($signed($urandom_range(0, 8*65536)) - 4*65536);
        e[r]   = r_act(0, r >= 3*N, 3, 0, 0, pre[r]);
      end
      valid_in = 1;
      @(negedge clk);
      valid_in = 0;
      checks++; if (!valid_out) failures++;
      for (int r = 0; r < 4*N; r++) begin
        checks++;
        if (gate[r] !== e[r]) begin failures++; if (failures < 10) $display("FAIL row %0d", r); end
      end
      // a new pre without valid_in must not change the buffers
      for (int r = 0; r < 4*N; r++) pre[r] = 0;
      @(negedge clk);
      checks++; if (valid_out || gate[0] !== e[0]) failures++;
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
