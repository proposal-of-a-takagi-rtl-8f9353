// wm: weighting unit WM-g of the numerator module.
//
// Computes the weighted consequent of rule g:
//   a = o * (A*x0 + B*x1 + C)
// x0, x1, A, B, C are [sV.N]; o is [uN.N]; a is [sH.N] with H = N+3, enough
// for |A*x0 + B*x1 + C| < 3 when all five values lie in (-1, 1).
// Two multipliers and two adders form the consequent at full precision
// (2N fractional bits); a third multiplier weights it by o, and the result
// is floored to N fractional bits. Combinational.
//
// The datapath (x0*A, x1*B, +C, *o) is as published. The coefficient values
// are parameters; nm sets them per rule from fuzzy_pkg, and the defaults
// here are those of rule 0. Both are this design's own, since none were
// published. Keeping full precision until
// the last product is also this design's choice.
module wm
  import fuzzy_pkg::*;
#(
  parameter int                       N   = 16,
  localparam int                      V   = w_v(N),
  localparam int                      H   = w_h(N),
  // Defaults: the coefficients of rule 0 (l = k = 0) of the rule base.
  parameter logic signed [w_v(N)-1:0] A_G = w_v(N)'(longint'(coef_a64(0)) <<< (N - 6)),
  parameter logic signed [w_v(N)-1:0] B_G = w_v(N)'(longint'(coef_b64(0)) <<< (N - 6)),
  parameter logic signed [w_v(N)-1:0] C_G = w_v(N)'(longint'(coef_c64(0, 0)) <<< (N - 6))
) (
  input  logic signed [V-1:0] x0,
  input  logic signed [V-1:0] x1,
  input  logic        [N-1:0] o,
  output logic signed [H-1:0] a
);

  localparam int SW = 2 * V + 2;         // consequent, 2N fractional bits
  localparam int PW = SW + N + 1;        // weighted, 3N fractional bits

  logic signed [SW-1:0] ax0, bx1, c_al, cons;
  logic signed [PW-1:0] prod;

  always_comb begin
    ax0  = SW'(x0) * SW'(A_G);
    bx1  = SW'(x1) * SW'(B_G);
    c_al = SW'(C_G) <<< N;
    cons = ax0 + bx1 + c_al;
    prod = PW'(cons) * $signed(PW'({1'b0, o}));
    a    = H'(prod >>> (2 * N));
  end

endmodule
