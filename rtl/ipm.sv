// ipm: Input Processing Module of the Fuzzy-PI controller.
//
// Turns the measured process variable y(n) and its set point y_sp(n) into the
// two inputs of the fuzzy inference:
//   e(n)  = y_sp(n) - y(n)
//   ed(n) = e(n) - e(n-1)
//   x0(n) = sat(Kp * ed(n)),  x1(n) = sat(Ki * e(n))
// y, y_sp and e are [sM.N]; x0 and x1 are [sV.N] (V = N+1, range [-1, 1)).
// One register holds e(n-1); everything else is combinational, so x0/x1 of
// sample n are valid in the same clock cycle as y(n). Each rising clock edge
// is one sample.
//
// Structure (two subtractors, one register, two gain multipliers that
// saturate to [sV.N]) follows the published architecture. Own choices: the
// gain format (signed, N fractional bits, KW bits, real-valued parameters
// converted at elaboration), the saturation of e and ed to M bits, flooring
// of the gain products, and the asynchronous active-low reset of e(n-1).
module ipm
  import fuzzy_pkg::*;
#(
  parameter int  N         = 16,
  parameter int  YMAX_LOG2 = 2,
  parameter real KP        = 2000.0,
  parameter real KI        = 0.1,
  parameter int  KW        = N + 13,
  localparam int M         = w_m(N, YMAX_LOG2),
  localparam int V         = w_v(N)
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic signed [M-1:0] y_sp,
  input  logic signed [M-1:0] y,
  output logic signed [V-1:0] x0,
  output logic signed [V-1:0] x1,
  output logic                x0_sat,
  output logic                x1_sat
);

  localparam longint KP_L = longint'(KP * (2.0 ** N));
  localparam longint KI_L = longint'(KI * (2.0 ** N));
  localparam logic signed [KW-1:0] KP_Q = KW'(KP_L);
  localparam logic signed [KW-1:0] KI_Q = KW'(KI_L);

  localparam logic signed [M-1:0] M_MAX = {1'b0, {(M-1){1'b1}}};
  localparam logic signed [M-1:0] M_MIN = {1'b1, {(M-1){1'b0}}};
  localparam int PW = M + KW;  // gain product width, 2N fractional bits

  logic signed [M:0]    e_w, ed_w;
  logic signed [M-1:0]  e, e_prev, ed;
  logic signed [PW-1:0] p0, p1;
  logic signed [PW-N-1:0] p0_s, p1_s;

  // Saturate an (M+1)-bit difference back to M bits.
  function automatic logic signed [M-1:0] sat_m(logic signed [M:0] v);
    if (v > $signed({M_MAX[M-1], M_MAX}))      return M_MAX;
    else if (v < $signed({M_MIN[M-1], M_MIN})) return M_MIN;
    else                                       return v[M-1:0];
  endfunction

  // Saturate a product (already scaled to N fractional bits) to [sV.N].
  function automatic logic signed [V:0] sat_v(logic signed [PW-N-1:0] v);
    logic signed [PW-N-1:0] vmax, vmin;
    vmax = (PW-N)'((longint'(1) << N) - 1);
    vmin = -(PW-N)'(longint'(1) << N);
    if (v > vmax)      return {1'b1, vmax[V-1:0]};
    else if (v < vmin) return {1'b1, vmin[V-1:0]};
    else               return {1'b0, v[V-1:0]};
  endfunction

  always_comb begin
    e_w  = {y_sp[M-1], y_sp} - {y[M-1], y};
    e    = sat_m(e_w);
    ed_w = {e[M-1], e} - {e_prev[M-1], e_prev};
    ed   = sat_m(ed_w);
    p0   = PW'(ed) * PW'(KP_Q);
    p1   = PW'(e)  * PW'(KI_Q);
    p0_s = (PW-N)'(p0 >>> N);   // floor to N fractional bits
    p1_s = (PW-N)'(p1 >>> N);
    {x0_sat, x0} = sat_v(p0_s);
    {x1_sat, x1} = sat_v(p1_s);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) e_prev <= '0;
    else        e_prev <= e;
  end

endmodule
