// nm: Numerator Module of the output function (defuzzification) stage.
//
// Forms a = sum over all rules g of o_g * (A_g*x0 + B_g*x1 + C_g): one WM-g
// unit per rule, all in parallel, then a balanced adder tree. The a_g are
// [sH.N], the sum a is [sP.N] with P = H + ceil(log2(F0*F1)). Combinational.
//
// Structure as published. The rule coefficients A_g, B_g, C_g are this
// design's own (fuzzy_pkg::coef_*): no values were published. They are
// defined in units of 1/64 and need N >= 6.
module nm
  import fuzzy_pkg::*;
#(
  parameter int  N  = 16,
  parameter int  F0 = NUM_MF,
  parameter int  F1 = NUM_MF,
  localparam int R  = F0 * F1,
  localparam int V  = w_v(N),
  localparam int H  = w_h(N),
  localparam int P  = w_p(N, R)
) (
  input  logic signed [V-1:0] x0,
  input  logic signed [V-1:0] x1,
  input  logic        [N-1:0] o [R],
  output logic signed [P-1:0] a
);

  logic [H-1:0] ag [R];

  for (genvar l = 0; l < F0; l++) begin : g_l
    for (genvar k = 0; k < F1; k++) begin : g_k
      wm #(
        .N  (N),
        .A_G(V'(coef_a64(l) * (1 << (N - 6)))),
        .B_G(V'(coef_b64(k) * (1 << (N - 6)))),
        .C_G(V'(coef_c64(l, k) * (1 << (N - 6))))
      ) u_wm (
        .x0(x0),
        .x1(x1),
        .o (o[l*F1 + k]),
        .a (ag[l*F1 + k])
      );
    end
  end

  logic [P-1:0] sum;
  adder_tree #(.COUNT(R), .IN_W(H), .OUT_W(P), .SIGNED(1'b1)) u_tree (.in(ag), .sum(sum));
  assign a = $signed(sum);

endmodule
