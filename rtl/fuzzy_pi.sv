// fuzzy_pi: Takagi-Sugeno Fuzzy-PI controller, top level.
//
// One controller channel: measured value y(n) and set point y_sp(n) in,
// actuator command r(n) out, one sample per clock.
//   IPM      e = y_sp - y, ed = e - e(n-1), x0 = sat(Kp*ed), x1 = sat(Ki*e)
//   TS-FIMM  v_d = Takagi-Sugeno inference on (x0, x1): 7 + 7 membership
//            functions, 49 min rules, weighted-mean defuzzification with
//            a float32 division
//   IM       r = clamp(v_d + r(n-1), v_min, v_max)
// PIPELINED = 0 uses the one-shot TS-FIMM: r(n) depends combinationally on
// y(n) in the same clock. PIPELINED = 1 uses the four-stage pipelined
// TS-FIMM: shorter clock period, but v_d (and so r) responds four samples
// later. Formats: y, y_sp [sM.N]; x0, x1, vd [sV.N]; r [sG.N].
// x0, x1 and vd are brought out for observation; status collects the
// saturation and guard flags {div_by_zero, vd_sat, r_sat_lo, r_sat_hi,
// x_sat}.
//
// The three-module chain and both TS-FIMM variants are as published; the
// choice of one-shot as default, the observation ports and the status
// flags are this design's own.
module fuzzy_pi
  import fuzzy_pkg::*;
#(
  parameter int  N         = 16,
  parameter int  T         = 10,
  parameter int  YMAX_LOG2 = 2,
  parameter int  G_INT     = 1,
  parameter real KP        = 2000.0,
  parameter real KI        = 0.1,
  parameter bit  PIPELINED = 1'b0,
  localparam int M         = w_m(N, YMAX_LOG2),
  localparam int V         = w_v(N),
  localparam int G         = w_g(N, G_INT)
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic signed [M-1:0] y_sp,
  input  logic signed [M-1:0] y,
  output logic signed [G-1:0] r,
  output logic signed [V-1:0] x0,
  output logic signed [V-1:0] x1,
  output logic signed [V-1:0] vd,
  output logic        [4:0]   status
);

  logic x0_sat, x1_sat, vd_sat, dbz, r_hi, r_lo;

  ipm #(.N(N), .YMAX_LOG2(YMAX_LOG2), .KP(KP), .KI(KI)) u_ipm (
    .clk(clk), .rst_n(rst_n), .y_sp(y_sp), .y(y),
    .x0(x0), .x1(x1), .x0_sat(x0_sat), .x1_sat(x1_sat)
  );

  if (PIPELINED) begin : g_pipe
    tsfimm_p #(.N(N), .T(T)) u_ts (
      .clk(clk), .rst_n(rst_n), .x0(x0), .x1(x1),
      .vd(vd), .vd_sat(vd_sat), .div_by_zero(dbz)
    );
  end else begin : g_os
    tsfimm_os #(.N(N), .T(T)) u_ts (
      .x0(x0), .x1(x1), .vd(vd), .vd_sat(vd_sat), .div_by_zero(dbz)
    );
  end

  im #(.N(N), .G_INT(G_INT)) u_im (
    .clk(clk), .rst_n(rst_n), .vd(vd), .r(r), .sat_hi(r_hi), .sat_lo(r_lo)
  );

  assign status = {dbz, vd_sat, r_lo, r_hi, x0_sat | x1_sat};

endmodule
