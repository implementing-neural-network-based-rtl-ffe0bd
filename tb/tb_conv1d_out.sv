// tb_conv1d_out: output convolution with a 10-row, 4-channel input, 2
// filters of 3 taps (8 outputs per filter).  A testbench memory answers the
// row reads one cycle later, as the hidden-state memory does.  Checks every
// output against the direct convolution sum and the NOUT*NK+2 cycle latency,
// then runs a second pass with new inputs (accumulators must restart).
module tb_conv1d_out;
  import nn_pkg::*;
  import ref_pkg::*;
  localparam int NS = 10, NCHT = 4, NFT = 2, NKT = 3, NO = NS - NKT + 1;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, w_we = 0, start = 0, busy, done;
  logic [7:0] w_row; logic [6:0] w_col; fx_t w_data;
  logic [$clog2(NS)-1:0] hs_raddr;
  fx_t hs_rdata [NCHT];
  fx_t y [NO][NFT];
  int  hs [NS][NCHT], wt [NFT][NKT][NCHT], bt [NFT];
  always #5 clk = ~clk;

  always_ff @(posedge clk) for (int ch = 0; ch < NCHT; ch++) hs_rdata[ch] <= hs[hs_raddr][ch];

  conv1d_out #(.NSYM_P(NS), .NCH(NCHT), .NF_P(NFT), .NK_P(NKT)) dut (.clk, .rst_n, .w_we, .w_row, .w_col,
    .w_data, .start, .busy, .done, .hs_raddr, .hs_rdata, .y);

  task automatic wr(int row, int col, int d);
    @(negedge clk);
    w_we = 1; w_row = 8'(row); w_col = 7'(col); w_data = d;
  endtask

  initial begin
    int e, cyc;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int f = 0; f < NFT; f++) begin
      for (int k = 0; k < NKT; k++)
        for (int ch = 0; ch < NCHT; ch++) begin
          wt[f][k][ch] = $signed($urandom_range(0, 2*65536)) - 65536;
          wr(f*NKT + k, ch, wt[f][k][ch]);
        end
      bt[f] = $signed($urandom_range(0, 65536)) - 32768;
      wr(NFT*NKT, f, bt[f]);
    end
    @(negedge clk); w_we = 0;
    for (int pass = 0; pass < 2; pass++) begin
      foreach (hs[i, ch]) hs[i][ch] = $signed($urandom_range(0, 2*65536)) - 65536;
      start = 1; @(negedge clk); start = 0;
      cyc = 1;
      while (!done) begin @(negedge clk); cyc++; end
      checks++;
      if (cyc != NO*NKT + 2) begin failures++; $display("FAIL latency %0d", cyc); end
      for (int j = 0; j < NO; j++)
        for (int f = 0; f < NFT; f++) begin
          e = bt[f];
          for (int k = 0; k < NKT; k++)
            for (int ch = 0; ch < NCHT; ch++) e += r_mul(wt[f][k][ch], hs[j+k][ch]);
          checks++;
          if (y[j][f] !== e) begin failures++; if (failures < 10) $display("FAIL y[%0d][%0d] %0d %0d", j, f, y[j][f], e); end
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
