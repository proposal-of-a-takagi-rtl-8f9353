// ofm: Output Function Module, the defuzzification stage of the TS-FIMM.
//
// v_d = a / b, the firing-strength-weighted mean of the rule consequents:
//   a = sum_g o_g * (A_g*x0 + B_g*x1 + C_g)   (NM, fixed point [sP.N])
//   b = sum_g o_g                             (DM, fixed point [uQ.N])
// Both sums are converted to float32 (FP2F), divided in float32, and the
// quotient is converted back to [sV.N] (F2FP). This mix of fixed point for
// the wide parallel sums and floating point for the single division is the
// published scheme. Combinational. vd_sat and div_by_zero flag the two
// guard cases of the converters and the divider.
module ofm
  import fuzzy_pkg::*;
#(
  parameter int  N  = 16,
  parameter int  F0 = NUM_MF,
  parameter int  F1 = NUM_MF,
  localparam int R  = F0 * F1,
  localparam int V  = w_v(N),
  localparam int P  = w_p(N, R),
  localparam int Q  = w_q(N, R)
) (
  input  logic signed [V-1:0] x0,
  input  logic signed [V-1:0] x1,
  input  logic        [N-1:0] o [R],
  output logic signed [V-1:0] vd,
  output logic                vd_sat,
  output logic                div_by_zero
);

  logic signed [P-1:0] a;
  logic        [Q-1:0] b;
  float32_t            a_f, b_f, vd_f;

  nm #(.N(N), .F0(F0), .F1(F1)) u_nm (.x0(x0), .x1(x1), .o(o), .a(a));
  dm #(.N(N), .F0(F0), .F1(F1)) u_dm (.o(o), .b(b));

  fp2f #(.IW(P), .FRAC(N), .SIGNED(1'b1)) u_fp2f_a (.fx(a), .fl(a_f));
  fp2f #(.IW(Q), .FRAC(N), .SIGNED(1'b0)) u_fp2f_b (.fx(b), .fl(b_f));

  fdiv u_div (.a(a_f), .b(b_f), .q(vd_f), .div_by_zero(div_by_zero));

  f2fp #(.N(N)) u_f2fp (.fl(vd_f), .fx(vd), .sat(vd_sat));

endmodule
