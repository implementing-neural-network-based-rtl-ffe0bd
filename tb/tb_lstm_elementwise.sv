// tb_lstm_elementwise: Stage 3 with 4 hidden units, 3-segment PWL tanh.
// Checks c_t = f*c + i*c~ one cycle and h_t = o*tanh(c_t) two cycles after
// valid_in, against the reference arithmetic.
module tb_lstm_elementwise;
  import nn_pkg::*;
  import ref_pkg::*;
  localparam int N = 4;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, valid_in = 0, valid_out;
  fx_t gate [4*N], c_prev [N], c [N], h [N];
  always #5 clk = ~clk;

  // published tanh coefficient set, as the coefficient memory holds after reset
  act_coef_t coef_tanh;
  fx_t [15:0] lut_tanh;
  assign coef_tanh = '{pwl: pwl_coef(FN_TANH, 3), tay: taylor_coef(FN_TANH, 9)};
  for (genvar k = 0; k < 16; k++) begin : g_lut
    assign lut_tanh[k] = lut_entry(FN_TANH, 4, k);
  end
  lstm_elementwise #(.NH_P(N)) dut (.clk, .rst_n, .valid_in, .coef_tanh, .lut_tanh, .gate, .c_prev, .c, .h, .valid_out);

  initial begin
    int ec [N], eh [N];
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int it = 0; it < 300; it++) begin
      @(negedge clk);
      for (int r = 0; r < 3*N; r++) gate[r] = $signed($urandom_range(0, 65536));      // sigmoid range
      for (int r = 3*N; r < 4*N; r++) gate[r] = $signed($urandom_range(0, 2*65536)) - 65536;
      for (int j = 0; j < N; j++) c_prev[j] = $signed($urandom_range(0, 6*65536)) - 3*65536;
      for (int j = 0; j < N; j++) begin
        ec[j] = r_mul(gate[N+j], c_prev[j]) + r_mul(gate[j], gate[3*N+j]);
        eh[j] = r_mul(gate[2*N+j], r_act(0, 1'b1, 3, 0, 0, ec[j]));
      end
      valid_in = 1;
      @(negedge clk);
      valid_in = 0;
      for (int r = 0; r < 4*N; r++) gate[r] = 0;
      for (int j = 0; j < N; j++) begin
        checks++; if (c[j] !== ec[j]) failures++;
      end
      checks++; if (valid_out) failures++;
      @(negedge clk);
      checks++; if (!valid_out) failures++;
      for (int j = 0; j < N; j++) begin
        checks++; if (h[j] !== eh[j]) begin failures++; if (failures < 10) $display("FAIL h %0d %0d %0d", j, h[j], eh[j]); end
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
