// im: Integration Module, the accumulator with saturation at the output.
//
//   r(n) = clamp(v_d(n) + r(n-1), v_min, v_max)
// v_d is [sV.N]; r is [sG.N] with G = N + G_INT + 1. The register holds the
// clamped r(n-1), so the accumulator cannot wind up beyond the limits.
// r(n) is combinational from v_d(n) (no added delay); the register updates
// on every rising clock edge, one sample per clock. sat_hi / sat_lo flag a
// clamped sample.
//
// Accumulator, feedback of the clamped value and the width formula are as
// published. Own choices: G_INT = 1 and limits of -1 and +1 (no values were
// published), and an asynchronous active-low reset of r(n-1) to zero.
module im
  import fuzzy_pkg::*;
#(
  parameter int  N     = 16,
  parameter int  G_INT = 1,
  localparam int V     = w_v(N),
  localparam int G     = w_g(N, G_INT),
  parameter logic signed [w_g(N, G_INT)-1:0] VMAX = w_g(N, G_INT)'(longint'(1) <<< N),
  parameter logic signed [w_g(N, G_INT)-1:0] VMIN = -w_g(N, G_INT)'(longint'(1) <<< N)
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic signed [V-1:0] vd,
  output logic signed [G-1:0] r,
  output logic                sat_hi,
  output logic                sat_lo
);

  logic signed [G-1:0] r_prev;
  logic signed [G:0]   v;

  always_comb begin
    v      = (G+1)'(vd) + (G+1)'(r_prev);
    sat_hi = (v > (G+1)'(VMAX));
    sat_lo = (v < (G+1)'(VMIN));
    if (sat_hi)      r = VMAX;
    else if (sat_lo) r = VMIN;
    else             r = v[G-1:0];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) r_prev <= '0;
    else        r_prev <= r;
  end

endmodule
