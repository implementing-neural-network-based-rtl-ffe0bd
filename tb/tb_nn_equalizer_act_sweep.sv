// tb_nn_equalizer_act_sweep: end-to-end test of the equalizer with the
// activation approximations that tb_nn_equalizer_top does not cover, so that
// together they run every precision step the design is offered with:
// 5- and 7-segment PWL, Taylor orders 1, 3, 5 and 7, and LUTs of 3, 5 and
// 10 bits (the published study spans 3 to 10 bits).  Each equalizer is at
// reduced size (12-symbol windows, 4 hidden units, 4-tap filters), processes
// two windows and is checked bit-exactly against ref_pkg::r_equalize, with
// the window latency NSYM*(NX+NH+7)+NOUT*NK+4 checked to the cycle (inside
// eq_harness).  Counted here, each must occur for every equalizer: windows,
// forward steps and backward steps.
module tb_nn_equalizer_act_sweep;
  import nn_pkg::*;
  localparam int N = 9;
  logic clk = 0;
  always #5 clk = ~clk;
  logic fin [N];
  int c [N], f [N], nf [N], nb [N], nw [N], nc [N];

  eq_harness #(.APPROX(APPROX_PWL), .NSEG(5))     h0 (.clk, .finished(fin[0]), .checks(c[0]), .failures(f[0]), .n_fwd_steps(nf[0]), .n_bwd_steps(nb[0]), .n_windows(nw[0]), .n_coef_writes(nc[0]));
  eq_harness #(.APPROX(APPROX_PWL), .NSEG(7))     h1 (.clk, .finished(fin[1]), .checks(c[1]), .failures(f[1]), .n_fwd_steps(nf[1]), .n_bwd_steps(nb[1]), .n_windows(nw[1]), .n_coef_writes(nc[1]));
  eq_harness #(.APPROX(APPROX_TAYLOR), .ORDER(1)) h2 (.clk, .finished(fin[2]), .checks(c[2]), .failures(f[2]), .n_fwd_steps(nf[2]), .n_bwd_steps(nb[2]), .n_windows(nw[2]), .n_coef_writes(nc[2]));
  eq_harness #(.APPROX(APPROX_TAYLOR), .ORDER(3)) h3 (.clk, .finished(fin[3]), .checks(c[3]), .failures(f[3]), .n_fwd_steps(nf[3]), .n_bwd_steps(nb[3]), .n_windows(nw[3]), .n_coef_writes(nc[3]));
  eq_harness #(.APPROX(APPROX_TAYLOR), .ORDER(5)) h4 (.clk, .finished(fin[4]), .checks(c[4]), .failures(f[4]), .n_fwd_steps(nf[4]), .n_bwd_steps(nb[4]), .n_windows(nw[4]), .n_coef_writes(nc[4]));
  eq_harness #(.APPROX(APPROX_TAYLOR), .ORDER(7)) h5 (.clk, .finished(fin[5]), .checks(c[5]), .failures(f[5]), .n_fwd_steps(nf[5]), .n_bwd_steps(nb[5]), .n_windows(nw[5]), .n_coef_writes(nc[5]));
  eq_harness #(.APPROX(APPROX_LUT), .BITS(3))     h6 (.clk, .finished(fin[6]), .checks(c[6]), .failures(f[6]), .n_fwd_steps(nf[6]), .n_bwd_steps(nb[6]), .n_windows(nw[6]), .n_coef_writes(nc[6]));
  eq_harness #(.APPROX(APPROX_LUT), .BITS(5))     h7 (.clk, .finished(fin[7]), .checks(c[7]), .failures(f[7]), .n_fwd_steps(nf[7]), .n_bwd_steps(nb[7]), .n_windows(nw[7]), .n_coef_writes(nc[7]));
  eq_harness #(.APPROX(APPROX_LUT), .BITS(10))    h8 (.clk, .finished(fin[8]), .checks(c[8]), .failures(f[8]), .n_fwd_steps(nf[8]), .n_bwd_steps(nb[8]), .n_windows(nw[8]), .n_coef_writes(nc[8]));

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
      $display("equalizer %0d: windows=%0d fwd_steps=%0d bwd_steps=%0d checks=%0d failures=%0d",
               i, nw[i], nf[i], nb[i], c[i], f[i]);
      checks++; if (nw[i] < 2) failures++;
      checks++; if (nf[i] == 0 || nb[i] == 0) failures++;
    end
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
