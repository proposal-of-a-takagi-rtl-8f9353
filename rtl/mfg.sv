// mfg: Membership Function Group MFG-i, the fuzzification of one input.
//
// Instantiates FI membership functions MF-i0 .. MF-i(FI-1) side by side, all
// fed by the same input x[sV.N], and returns their degrees f[j][uN.N].
// With FI = 7 the functions are LN, MN, SN, ZZ, SP, MP, LP: right trapezoid
// at the negative end, left trapezoid at the positive end and five
// triangles, spaced 0.25 apart on [-1, 1]. The breakpoints come from
// fuzzy_pkg and are scaled to [sW.T] codes here. Purely combinational.
//
// The group structure and the seven-function layout follow the published
// design; the exact breakpoint values are this design's reading of the
// plotted functions (peaks of MN, ZZ, MP at -0.5, 0, 0.5).
module mfg
  import fuzzy_pkg::*;
#(
  parameter int  N  = 16,
  parameter int  T  = 10,
  parameter int  FI = NUM_MF,
  localparam int V  = w_v(N)
) (
  input  logic signed [V-1:0] x,
  output logic        [N-1:0] f [FI]
);

  // Quarter units (0.25) to [sW.T] codes: multiply by 2^(T-2). Needs T >= 2.
  localparam int QS = T - 2;

  for (genvar j = 0; j < FI; j++) begin : g_mf
    mf #(
      .N    (N),
      .T    (T),
      .SHAPE(mf_shape(j)),
      .LO   (mf_lo_q(j)  * (1 << QS)),
      .MID  (mf_mid_q(j) * (1 << QS)),
      .HI   (mf_hi_q(j)  * (1 << QS))
    ) u_mf (
      .x(x),
      .f(f[j])
    );
  end

endmodule
