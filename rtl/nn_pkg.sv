// nn_pkg: shared types, sizes and constant tables of the biLSTM+CNN equalizer.
//
// All data (input symbols, weights, biases, activations) are 32-bit signed
// fixed-point numbers.  The 32-bit word length follows the published design
// (int32 inputs and weights); the split into 16 integer and 16 fractional bits
// is this implementation's choice.  A product of two words is formed at 64
// bits, shifted right arithmetically by FRAC and truncated back to 32 bits;
// sums wrap at 32 bits like C int32 arithmetic.
//
// The package also holds the coefficient sets of the three activation-function
// approximations: the piecewise-linear (PWL) tables for 3, 5, 7 and 9 segments
// exactly as published, the Taylor coefficients of tanh and sigmoid up to the
// 9th order, and a generator for the uniform look-up table.
package nn_pkg;

  localparam int DW   = 32;   // word length (published: int32)
  localparam int FRAC = 16;   // fractional bits (own choice)

  // Network sizes of the published biLSTM+CNN equalizer
  localparam int NSYM = 81;   // input symbols per window
  localparam int NX   = 4;    // features per symbol: XI, XQ, YI, YQ
  localparam int NH   = 35;   // hidden units per LSTM direction
  localparam int NF   = 2;    // output filters: XI, XQ
  localparam int NK   = 21;   // output kernel length (no padding)
  localparam int NOUT = NSYM - NK + 1;  // 61 recovered symbols

  typedef logic signed [DW-1:0] fx_t;

  typedef enum logic [1:0] {APPROX_PWL = 2'd0, APPROX_TAYLOR = 2'd1, APPROX_LUT = 2'd2} approx_e;
  typedef enum logic {FN_SIGMOID = 1'b0, FN_TANH = 1'b1} func_e;

  // Targets of the parameter/data load port
  typedef enum logic [2:0] {SEL_LSTM_FWD = 3'd0, SEL_LSTM_BWD = 3'd1, SEL_CONV = 3'd2, SEL_INPUT = 3'd3,
                            SEL_ACT = 3'd4} cfg_sel_e;

  // One write on the load port.  LSTM: row = gate row (gate*NH+unit, gates in
  // the order i, f, o, c~), col = 0..NX-1 for W, NX..NX+NH-1 for U, NX+NH for
  // the bias.  Conv: row = filter*NK+tap, col = channel; row NF*NK, col =
  // filter holds the biases.  Input: row = symbol, col = feature.
  // Activation coefficients: row[7] = function (0 sigmoid, 1 tanh), entry =
  // {row[6:0], col}; see the ACT_* entry map below.
  typedef struct packed {
    logic     we;
    cfg_sel_e sel;
    logic [7:0] row;
    logic [6:0] col;
    fx_t      data;
  } cfg_wr_t;

  function automatic fx_t fx_mul(fx_t a, fx_t b);
    logic signed [2*DW-1:0] p;
    p = 64'(a) * 64'(b);
    return fx_t'(p >>> FRAC);
  endfunction

  // real -> fixed point, rounded to nearest (constant use only)
  function automatic fx_t to_fx(real r);
    return fx_t'($rtoi(r * real'(1 << FRAC) + ((r >= 0.0) ? 0.5 : -0.5)));
  endfunction

  // ---------------------------------------------------------------- PWL
  // Segment s covers brk[s-1] < x <= brk[s]; segment 0 is x <= brk[0] and
  // segment NSEG-1 is x > brk[NSEG-2].  y = slope[s]*x + icpt[s].
  localparam int PWL_MAX = 9;
  typedef struct packed {
    fx_t [PWL_MAX-2:0] brk;
    fx_t [PWL_MAX-1:0] slope;
    fx_t [PWL_MAX-1:0] icpt;
  } pwl_coef_t;

  function automatic pwl_coef_t pwl_set(input int n, input real b[8], input real s[9], input real c[9]);
    pwl_coef_t p;
    p = '0;
    for (int i = 0; i < n - 1; i++) p.brk[i] = to_fx(b[i]);
    for (int i = 0; i < n; i++) begin
      p.slope[i] = to_fx(s[i]);
      p.icpt[i]  = to_fx(c[i]);
    end
    return p;
  endfunction

  // Published PWL tables (segments listed from the most negative x upwards)
  function automatic pwl_coef_t pwl_coef(func_e fn, int nseg);
    if (fn == FN_TANH) begin
      case (nseg)
        3: return pwl_set(3, '{-1.1, 1.1, 0, 0, 0, 0, 0, 0},
                             '{0.0, 0.90909, 0.0, 0, 0, 0, 0, 0, 0},
                             '{-1.0, 0.0, 1.0, 0, 0, 0, 0, 0, 0});
        5: return pwl_set(5, '{-1.7, -0.5, 0.5, 1.7, 0, 0, 0, 0},
                             '{0.0, 0.41666, 1.0, 0.41666, 0.0, 0, 0, 0, 0},
                             '{-1.0, -0.29166, 0.0, 0.29166, 1.0, 0, 0, 0, 0});
        7: return pwl_set(7, '{-1.8, -1.1, -0.4, 0.4, 1.1, 1.8, 0, 0},
                             '{0.0, 0.285, 0.57214, 1.0, 0.57214, 0.285, 0.0, 0, 0},
                             '{-1.0, -0.48699, -0.17114, 0.0, 0.17114, 0.48699, 1.0, 0, 0});
        default: return pwl_set(9, '{-2.2, -1.4, -0.9, -0.3, 0.3, 0.9, 1.4, 2.2},
                             '{0.0, 0.14331, 0.3381, 0.269382, 1.0, 0.269382, 0.3381, 0.14331, 0.0},
                             '{-1.0, -0.68417, -0.412, -0.09185, 0.0, 0.09185, 0.412, 0.68417, 1.0});
      endcase
    end else begin
      case (nseg)
        3: return pwl_set(3, '{-2.2, 2.2, 0, 0, 0, 0, 0, 0},
                             '{0.0, 0.22727, 0.0, 0, 0, 0, 0, 0, 0},
                             '{0.0, 0.5, 1.0, 0, 0, 0, 0, 0, 0});
        5: return pwl_set(5, '{-2.6, -0.8, 0.8, 2.6, 0, 0, 0, 0},
                             '{0.0, 0.17223, 0.23747, 0.17223, 0.0, 0, 0, 0, 0},
                             '{0.0, 0.44781, 0.5, 0.55219, 1.0, 0, 0, 0, 0});
        7: return pwl_set(7, '{-3.0, -1.4, -0.8, 0.8, 1.4, 3.0, 0, 0},
                             '{0.0, 0.12363, 0.18701, 0.23747, 0.18701, 0.12363, 0.0, 0, 0},
                             '{0.0, 0.37091, 0.45964, 0.5, 0.54036, 0.62909, 1.0, 0, 0});
        default: return pwl_set(9, '{-3.4, -2.0, -1.5, -0.8, 0.8, 1.5, 2.0, 3.4},
                             '{0.0, 0.182242, 0.12644, 0.08514, 0.23747, 0.182242, 0.12644, 0.08514, 0.0},
                             '{0.0, 0.28949, 0.37209, 0.45585, 0.5, 0.09185, 0.62791, 0.71051, 1.0});
      endcase
    end
  endfunction

  // ------------------------------------------------------------- Taylor
  // y = c0 + x*(a1 + x^2*(a3 + x^2*(a5 + x^2*(a7 + x^2*a9)))) inside
  // (-bound, bound); lo below -bound, hi above bound.
  typedef struct packed {
    fx_t [4:0] a;      // a1, a3, a5, a7, a9
    fx_t       c0;
    fx_t       bound;
    fx_t       lo;
    fx_t       hi;
  } taylor_coef_t;

  // Clamp bounds a_t = 1.0 and a_sigma = 2.0 are this implementation's
  // choice (the published values came from a grid search and are not given).
  localparam real TAYLOR_BOUND_TANH = 1.0;
  localparam real TAYLOR_BOUND_SIG  = 2.0;

  function automatic taylor_coef_t taylor_coef(func_e fn, int order);
    taylor_coef_t t;
    real a[5];
    if (fn == FN_TANH) begin
      a = '{1.0, -1.0/3.0, 2.0/15.0, -17.0/315.0, 62.0/2835.0};
      t.c0 = '0;  t.bound = to_fx(TAYLOR_BOUND_TANH);  t.lo = to_fx(-1.0);  t.hi = to_fx(1.0);
    end else begin
      a = '{1.0/4.0, -1.0/48.0, 1.0/480.0, -17.0/80640.0, 31.0/1451520.0};
      t.c0 = to_fx(0.5);  t.bound = to_fx(TAYLOR_BOUND_SIG);  t.lo = '0;  t.hi = to_fx(1.0);
    end
    for (int i = 0; i < 5; i++) t.a[i] = (2 * i + 1 <= order) ? to_fx(a[i]) : '0;
    return t;
  endfunction

  // ---------------------------------------------------------------- LUT
  // 2^BITS levels spread evenly over [-LUT_XR, +LUT_XR]; LUT_XR = 2^LUT_XR_LOG2
  // (4.0, own choice) so that the level index needs no divider.
  localparam int  LUT_XR_LOG2 = 2;
  localparam real LUT_XR      = 4.0;

  function automatic real act_exact(func_e fn, real x);
    return (fn == FN_TANH) ? $tanh(x) : 1.0 / (1.0 + $exp(-x));
  endfunction

  function automatic fx_t lut_entry(func_e fn, int bits, int k);
    real step;
    step = 2.0 * LUT_XR / real'((1 << bits) - 1);
    return to_fx(act_exact(fn, -LUT_XR + real'(k) * step));
  endfunction

  // ------------------------------------------------ coefficient memory
  // Coefficients of one function, as read by an activation unit.  The LUT
  // table depends on LUT_BITS and travels on its own port.
  typedef struct packed {
    pwl_coef_t    pwl;
    taylor_coef_t tay;
  } act_coef_t;

  // Entry map of the coefficient memory (load port, sel = SEL_ACT).
  // PWL: brk[0..7], slope[0..8], icpt[0..8] (segments counted from the
  // bottom).  Taylor: a1, a3, a5, a7, a9, c0, bound, lo, hi.  LUT: entry = k.
  localparam int ACT_PWL_BRK   = 0;
  localparam int ACT_PWL_SLOPE = 8;
  localparam int ACT_PWL_ICPT  = 17;
  localparam int ACT_PWL_END   = 26;
  localparam int ACT_TAY_A     = 0;
  localparam int ACT_TAY_C0    = 5;
  localparam int ACT_TAY_BOUND = 6;
  localparam int ACT_TAY_LO    = 7;
  localparam int ACT_TAY_HI    = 8;

endpackage
