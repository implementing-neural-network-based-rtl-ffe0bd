// tb_nn_equalizer_top: end-to-end test of the equalizer at reduced size
// (12-symbol windows, 4 hidden units per direction, 4-tap output filters,
// 9 outputs).  Seven equalizers run side by side: 3- and 9-segment PWL,
// 9th-order Taylor and 8-bit LUT with the coefficient memory as reset, and
// 3-segment PWL, 9th-order Taylor and 4-bit LUT whose coefficient memory is
// reloaded through the load port with the sigmoid and tanh sets swapped.
// Each processes two windows with the same weights; outputs are checked
// bit-exactly and the window latency exactly (inside eq_harness).
// Mechanisms counted, each must occur: forward and backward recurrent steps,
// back-to-back windows with weights kept, coefficient reloads, and PWL
// activations in the upper saturated, lower saturated and sloped segments.
module tb_nn_equalizer_top;
  import nn_pkg::*;
  import ref_pkg::*;
  localparam int N = 7;
  logic clk = 0;
  always #5 clk = ~clk;
  logic fin [N];
  int c [N], f [N], nf [N], nb [N], nw [N], nc [N];

  eq_harness #(.APPROX(APPROX_PWL), .NSEG(3))     h0 (.clk, .finished(fin[0]), .checks(c[0]), .failures(f[0]), .n_fwd_steps(nf[0]), .n_bwd_steps(nb[0]), .n_windows(nw[0]), .n_coef_writes(nc[0]));
  eq_harness #(.APPROX(APPROX_PWL), .NSEG(9))     h1 (.clk, .finished(fin[1]), .checks(c[1]), .failures(f[1]), .n_fwd_steps(nf[1]), .n_bwd_steps(nb[1]), .n_windows(nw[1]), .n_coef_writes(nc[1]));
  eq_harness #(.APPROX(APPROX_TAYLOR), .ORDER(9)) h2 (.clk, .finished(fin[2]), .checks(c[2]), .failures(f[2]), .n_fwd_steps(nf[2]), .n_bwd_steps(nb[2]), .n_windows(nw[2]), .n_coef_writes(nc[2]));
  eq_harness #(.APPROX(APPROX_LUT), .BITS(8))     h3 (.clk, .finished(fin[3]), .checks(c[3]), .failures(f[3]), .n_fwd_steps(nf[3]), .n_bwd_steps(nb[3]), .n_windows(nw[3]), .n_coef_writes(nc[3]));
  eq_harness #(.APPROX(APPROX_PWL), .NSEG(3), .SWAP_COEF(1'b1))     h4 (.clk, .finished(fin[4]), .checks(c[4]), .failures(f[4]), .n_fwd_steps(nf[4]), .n_bwd_steps(nb[4]), .n_windows(nw[4]), .n_coef_writes(nc[4]));
  eq_harness #(.APPROX(APPROX_TAYLOR), .ORDER(9), .SWAP_COEF(1'b1)) h5 (.clk, .finished(fin[5]), .checks(c[5]), .failures(f[5]), .n_fwd_steps(nf[5]), .n_bwd_steps(nb[5]), .n_windows(nw[5]), .n_coef_writes(nc[5]));
  eq_harness #(.APPROX(APPROX_LUT), .BITS(4), .SWAP_COEF(1'b1))     h6 (.clk, .finished(fin[6]), .checks(c[6]), .failures(f[6]), .n_fwd_steps(nf[6]), .n_bwd_steps(nb[6]), .n_windows(nw[6]), .n_coef_writes(nc[6]));

  int checks = 0, failures = 0;

  function automatic bit all_done();
    foreach (fin[i]) if (!fin[i]) return 1'b0;
    return 1'b1;
  endfunction

  initial begin
    @(posedge clk);                       // let the harnesses clear their flags
    while (!all_done()) @(posedge clk);
    for (int i = 0; i < N; i++) begin
      checks += c[i];  failures += f[i];
      $display("equalizer %0d: windows=%0d fwd_steps=%0d bwd_steps=%0d coef_writes=%0d checks=%0d failures=%0d",
               i, nw[i], nf[i], nb[i], nc[i], c[i], f[i]);
      checks++; if (nw[i] < 2) failures++;
      checks++; if (nf[i] == 0 || nb[i] == 0) failures++;
      if (i >= 4) begin checks++; if (nc[i] == 0) failures++; end
    end
    $display("PWL regions: upper=%0d lower=%0d sloped=%0d", n_sat_hi, n_sat_lo, n_slope);
    checks += 3;
    if (n_sat_hi == 0) failures++;
    if (n_sat_lo == 0) failures++;
    if (n_slope == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
