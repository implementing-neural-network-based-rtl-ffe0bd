// act_coef_mem: coefficient memory of the activation functions.
//
// The published activation "logic box" takes x together with a set of
// coefficients that are read from FPGA memory, so that the approximation can
// be re-tuned (after retraining or a new grid search) without rebuilding the
// logic.  This memory holds one coefficient set for the sigmoid and one for
// the tanh, shared by every activation unit of the equalizer.  Only the kind
// of approximation selected by APPROX is stored: the PWL breakpoints, slopes
// and intercepts, the Taylor coefficients, clamp bound and clamp values, or
// the 2^LUT_BITS table entries.  At reset it takes the published coefficient
// sets (nn_pkg::pwl_coef, taylor_coef; LUT entries f(level) from
// nn_pkg::lut_entry), so the equalizer works without loading it.  The other
// kinds' fields are driven with those constants and are unused.
//
// Interface: one write port (we, row, col, data) fed from the load port:
// row[7] picks the function (0 sigmoid, 1 tanh), {row[6:0], col} the entry,
// mapped by nn_pkg::ACT_*; writes to entries beyond the stored set are
// ignored.  coef[fn] and lut[fn] are register outputs, indexed by func_e.
// Timing: a write is visible the cycle after it.  Write only while the
// equalizer is idle.  The entry map and the sharing of one set by all units
// are this design's choices.
module act_coef_mem
  import nn_pkg::*;
#(
  parameter approx_e APPROX   = APPROX_PWL,
  parameter int      NSEG     = 3,
  parameter int      ORDER    = 9,
  parameter int      LUT_BITS = 4
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        we,
  input  logic [7:0]  row,
  input  logic [6:0]  col,
  input  fx_t         data,
  output act_coef_t   coef [2],
  output fx_t [(1<<LUT_BITS)-1:0] lut [2]
);

  localparam int NLUT = 1 << LUT_BITS;

  logic [13:0] idx;
  assign idx = {row[6:0], col};

  for (genvar f = 0; f < 2; f++) begin : g_fn
    localparam pwl_coef_t    PWL0 = pwl_coef(func_e'(f), NSEG);
    localparam taylor_coef_t TAY0 = taylor_coef(func_e'(f), ORDER);

    logic         wr;
    pwl_coef_t    pwl_q;
    taylor_coef_t tay_q;
    fx_t [NLUT-1:0] lut0, lut_q;

    assign wr = we && (row[7] == f[0]);

    for (genvar k = 0; k < NLUT; k++) begin : g_lut0
      localparam fx_t V = lut_entry(func_e'(f), LUT_BITS, k);
      assign lut0[k] = V;
    end

    if (APPROX == APPROX_PWL) begin : g_pwl
      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n) pwl_q <= PWL0;
        else if (wr) begin
          if (int'(idx) < ACT_PWL_SLOPE)     pwl_q.brk[3'(idx - ACT_PWL_BRK)]    <= data;
          else if (int'(idx) < ACT_PWL_ICPT) pwl_q.slope[4'(idx - ACT_PWL_SLOPE)] <= data;
          else if (int'(idx) < ACT_PWL_END)  pwl_q.icpt[4'(idx - ACT_PWL_ICPT)]   <= data;
        end
      end
    end else begin : g_pwl_const
      assign pwl_q = PWL0;
    end

    if (APPROX == APPROX_TAYLOR) begin : g_tay
      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n) tay_q <= TAY0;
        else if (wr) begin
          if (int'(idx) < ACT_TAY_C0)          tay_q.a[3'(idx - ACT_TAY_A)] <= data;
          else if (int'(idx) == ACT_TAY_C0)    tay_q.c0    <= data;
          else if (int'(idx) == ACT_TAY_BOUND) tay_q.bound <= data;
          else if (int'(idx) == ACT_TAY_LO)    tay_q.lo    <= data;
          else if (int'(idx) == ACT_TAY_HI)    tay_q.hi    <= data;
        end
      end
    end else begin : g_tay_const
      assign tay_q = TAY0;
    end

    if (APPROX == APPROX_LUT) begin : g_lut
      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n) lut_q <= lut0;
        else if (wr && int'(idx) < NLUT) lut_q[idx[LUT_BITS-1:0]] <= data;
      end
    end else begin : g_lut_const
      assign lut_q = lut0;
    end

    assign coef[f] = '{pwl: pwl_q, tay: tay_q};
    assign lut[f]  = lut_q;
  end

endmodule
