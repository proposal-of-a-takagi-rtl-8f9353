// mf: one membership function MF-ij of the fuzzification stage.
//
// Evaluates a piecewise-linear membership function on x[sV.N] and returns its
// degree f[uN.N]:
//   right trapezoid: 1 for x < c, (d-x)/(d-c) for c <= x <= d, 0 for x > d
//   left trapezoid : 0 for x < e, (x-e)/(f-e) for e <= x <= f, 1 for x > f
//   triangle       : left-trapezoid edge (e, m) for x < m, right-trapezoid
//                    edge (m, d) for x >= m
// The breakpoints are constants in [sW.T] (W = 2T+1), given as the integer
// codes LO (e), MID (c = f = m) and HI (d). Purely combinational.
//
// The equations and the [sW.T] constants follow the published description.
// Own choices: the constant division is a multiplication by a rounded
// reciprocal with RS guard bits (result within one LSB of the exact floor),
// and a degree of exactly 1, which [uN.N] cannot hold, saturates to 1-2^-N.
module mf
  import fuzzy_pkg::*;
#(
  parameter int        N     = 16,
  parameter int        T     = 10,
  parameter mf_shape_e SHAPE = MF_TRIANGLE,
  parameter int        LO    = -(1 << T),      // e, code of [sW.T]
  parameter int        MID   = 0,              // c = f = m
  parameter int        HI    = (1 << T),       // d
  localparam int       V     = w_v(N)
) (
  input  logic signed [V-1:0] x,
  output logic        [N-1:0] f
);

  localparam int W  = w_w(T);
  localparam int FR = (N > T) ? N : T;                       // common fraction
  localparam int AW = FR + (((W - T) > (V - N)) ? (W - T) : (V - N)) + 2;
  localparam int RS = FR + 2;                                // reciprocal guard bits

  // Breakpoints aligned to FR fractional bits.
  localparam longint LO_A  = longint'(LO)  <<< (FR - T);
  localparam longint MID_A = longint'(MID) <<< (FR - T);
  localparam longint HI_A  = longint'(HI)  <<< (FR - T);

  // Reciprocals of the two edge widths: round(2^(N+RS) / width).
  localparam longint DEN_UP = (MID_A > LO_A) ? (MID_A - LO_A) : 1;
  localparam longint DEN_DN = (HI_A > MID_A) ? (HI_A - MID_A) : 1;
  localparam longint REC_UP = ((longint'(1) <<< (N + RS)) + DEN_UP / 2) / DEN_UP;
  localparam longint REC_DN = ((longint'(1) <<< (N + RS)) + DEN_DN / 2) / DEN_DN;
  localparam int     RW     = N + RS + 2;                    // reciprocal width
  localparam int     PRW    = AW + RW;

  localparam logic [N-1:0] ONE = '1;   // largest [uN.N] value, 1 - 2^-N

  logic signed [AW-1:0] xa;
  logic        [N-1:0]  f_up, f_dn;   // rising and falling edge degrees

  // Degree on an edge whose width has reciprocal 'rec': num * rec >> RS,
  // clipped to ONE. num is non-negative and at most the edge width.
  function automatic logic [N-1:0] edge_deg(logic [AW-1:0] num, logic [RW-1:0] rec);
    logic [PRW-1:0]    prod;
    logic [PRW-RS-1:0] q;
    logic [N-1:0]      d;
    prod = PRW'(num) * PRW'(rec);
    q    = (PRW-RS)'(prod >> RS);
    d    = (q > (PRW-RS)'(ONE)) ? ONE : q[N-1:0];
    return d;
  endfunction

  function automatic logic [N-1:0] rising(logic signed [AW-1:0] v);
    logic [N-1:0] d;
    if (v < AW'(LO_A))       d = '0;
    else if (v > AW'(MID_A)) d = ONE;
    else                     d = edge_deg(AW'(v - AW'(LO_A)), RW'(REC_UP));
    return d;
  endfunction

  function automatic logic [N-1:0] falling(logic signed [AW-1:0] v);
    logic [N-1:0] d;
    if (v > AW'(HI_A))       d = '0;
    else if (v < AW'(MID_A)) d = ONE;
    else                     d = edge_deg(AW'(AW'(HI_A) - v), RW'(REC_DN));
    return d;
  endfunction

  always_comb begin
    xa = AW'(x) <<< (FR - N);
    f_up = rising(xa);
    f_dn = falling(xa);
    unique case (SHAPE)
      MF_RIGHT_TRAP: f = f_dn;
      MF_LEFT_TRAP:  f = f_up;
      default:       f = (xa < AW'(MID_A)) ? f_up : f_dn;
    endcase
  end

endmodule
