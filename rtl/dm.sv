// dm: Denominator Module of the output function (defuzzification) stage.
//
// Sums the F0*F1 rule strengths o_g[uN.N] in a balanced adder tree into
// b[uQ.N], Q = N + ceil(log2(F0*F1)) + 1. b is never negative, so it is
// kept unsigned (one spare top bit, as the published width allows for a
// sign). Combinational. Structure as published.
module dm
  import fuzzy_pkg::*;
#(
  parameter int  N  = 16,
  parameter int  F0 = NUM_MF,
  parameter int  F1 = NUM_MF,
  localparam int R  = F0 * F1,
  localparam int Q  = w_q(N, R)
) (
  input  logic [N-1:0] o [R],
  output logic [Q-1:0] b
);

  adder_tree #(.COUNT(R), .IN_W(N), .OUT_W(Q), .SIGNED(1'b0)) u_tree (.in(o), .sum(b));

endmodule
