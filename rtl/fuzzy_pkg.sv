// fuzzy_pkg: widths, shapes and constants shared by the Takagi-Sugeno
// Fuzzy-PI controller.
//
// Number formats follow the [sT.W]/[uT.W] convention: T bits in total, W of
// them fractional, "s" two's complement, "u" unsigned. All widths below are
// functions of N, the number of fractional bits of the datapath, and are
// computed here so every module derives them the same way:
//   V = N+1                 x0, x1, v_d  ([sV.N], range [-1, 1))
//   M = N + YMAX_LOG2 + 1   y, y_sp, e   ([sM.N])
//   H = N+3                 a_g          ([sH.N])
//   P = H + ceil(log2 R)    a            ([sP.N], R = number of rules)
//   Q = N + ceil(log2 R)+1  b            ([uQ.N])
//   G = N + G_INT + 1       r            ([sG.N])
// The formulas are those of the controller's description; YMAX_LOG2, G_INT,
// the membership-function breakpoints and the rule coefficients are this
// design's own choices where no values were published (see README).
package fuzzy_pkg;

  // Shapes of a membership function.
  typedef enum logic [1:0] {
    MF_RIGHT_TRAP = 2'd0,  // 1 below c, ramps down to 0 at d
    MF_LEFT_TRAP  = 2'd1,  // 0 below e, ramps up to 1 at f
    MF_TRIANGLE   = 2'd2   // ramps up e..m, down m..d
  } mf_shape_e;

  // Seven membership functions per input: LN MN SN ZZ SP MP LP.
  localparam int NUM_MF = 7;

  function automatic int w_v(int n);                return n + 1;                         endfunction
  function automatic int w_m(int n, int ymax_log2); return n + ymax_log2 + 1;             endfunction
  function automatic int w_h(int n);                return n + 3;                         endfunction
  function automatic int w_p(int n, int rules);     return n + 3 + $clog2(rules);         endfunction
  function automatic int w_q(int n, int rules);     return n + $clog2(rules) + 1;         endfunction
  function automatic int w_g(int n, int g_int);     return n + g_int + 1;                 endfunction
  // Width of the membership-function constants [sW.T], W = 2T+1.
  function automatic int w_w(int t);                return 2 * t + 1;                     endfunction

  function automatic mf_shape_e mf_shape(int j);
    if (j == 0)               return MF_RIGHT_TRAP;
    else if (j == NUM_MF - 1) return MF_LEFT_TRAP;
    else                      return MF_TRIANGLE;
  endfunction

  // Breakpoints of function j in quarter units (0.25). 'lo' is where the
  // rising edge starts (e), 'mid' the peak (m = f = c), 'hi' where the falling
  // edge ends (d). For the right trapezoid only mid (c) and hi (d) are used,
  // for the left trapezoid only lo (e) and mid (f).
  function automatic int mf_lo_q(int j);
    if (j == 0)               return -4;       // unused
    else if (j == NUM_MF - 1) return 2;        // LP: e = 0.5
    else                      return j - 4;    // triangle: e = m - 0.25
  endfunction
  function automatic int mf_mid_q(int j);
    if (j == 0)               return -3;       // LN: c = -0.75
    else if (j == NUM_MF - 1) return 3;        // LP: f = 0.75
    else                      return j - 3;    // triangle peak
  endfunction
  function automatic int mf_hi_q(int j);
    if (j == 0)               return -2;       // LN: d = -0.5
    else if (j == NUM_MF - 1) return 4;        // unused
    else                      return j - 2;    // triangle: d = m + 0.25
  endfunction

  // Rule consequents v_g = A_g*x0 + B_g*x1 + C_g for rule g = l*F1 + k,
  // in units of 1/64 (exact in [sV.N] for N >= 6). |A|+|B|+|C| < 1.
  function automatic int abs_i(int v); return (v < 0) ? -v : v; endfunction
  function automatic int coef_a64(int l);        return 32 - 4 * abs_i(l - 3);  endfunction
  function automatic int coef_b64(int k);        return 16 + 2 * abs_i(k - 3);  endfunction
  function automatic int coef_c64(int l, int k); return l + k - 6;              endfunction

  // IEEE-754 single precision fields.
  typedef struct packed {
    logic        sign;
    logic [7:0]  exp;
    logic [22:0] man;
  } float32_t;

endpackage
