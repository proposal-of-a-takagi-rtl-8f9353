// tsfimm_p: Takagi-Sugeno fuzzy inference machine, pipelined version.
//
// Same computation as tsfimm_os, cut by four register ranks:
//   rank 1: x0, x1 at the input
//   rank 2: the membership degrees f after the MFM      (sample n-1)
//   rank 3: the rule strengths o after the OM           (sample n-2),
//           with x0, x1 delayed by two more registers to stay aligned
//   rank 4: v_d after the OFM                           (sample n-4 at vd)
// A new sample is accepted every clock; vd carries the result of the input
// presented four clocks earlier. The register placement and the four-sample
// latency are as published. Registers reset asynchronously (active low) to
// zero, this design's own choice; the flags vd_sat and div_by_zero are
// registered with vd.
module tsfimm_p
  import fuzzy_pkg::*;
#(
  parameter int  N  = 16,
  parameter int  T  = 10,
  parameter int  F0 = NUM_MF,
  parameter int  F1 = NUM_MF,
  localparam int V  = w_v(N),
  localparam int R  = F0 * F1
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic signed [V-1:0] x0,
  input  logic signed [V-1:0] x1,
  output logic signed [V-1:0] vd,
  output logic                vd_sat,
  output logic                div_by_zero
);

  // rank 1
  logic signed [V-1:0] x0_r1, x1_r1;
  // rank 2
  logic [N-1:0] f0_c [F0];
  logic [N-1:0] f1_c [F1];
  logic [N-1:0] f0_r [F0];
  logic [N-1:0] f1_r [F1];
  logic signed [V-1:0] x0_r2, x1_r2;
  // rank 3
  logic [N-1:0] o_c [R];
  logic [N-1:0] o_r [R];
  logic signed [V-1:0] x0_r3, x1_r3;
  // rank 4
  logic signed [V-1:0] vd_c;
  logic                sat_c, dbz_c;

  mfm #(.N(N), .T(T), .F0(F0), .F1(F1)) u_mfm (.x0(x0_r1), .x1(x1_r1), .f0(f0_c), .f1(f1_c));
  om  #(.N(N), .F0(F0), .F1(F1))        u_om  (.f0(f0_r), .f1(f1_r), .o(o_c));
  ofm #(.N(N), .F0(F0), .F1(F1))        u_ofm (.x0(x0_r3), .x1(x1_r3), .o(o_r), .vd(vd_c),
                                               .vd_sat(sat_c), .div_by_zero(dbz_c));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      x0_r1 <= '0;  x1_r1 <= '0;
      x0_r2 <= '0;  x1_r2 <= '0;
      x0_r3 <= '0;  x1_r3 <= '0;
      for (int i = 0; i < F0; i++) f0_r[i] <= '0;
      for (int i = 0; i < F1; i++) f1_r[i] <= '0;
      for (int i = 0; i < R;  i++) o_r[i]  <= '0;
      vd <= '0;  vd_sat <= 1'b0;  div_by_zero <= 1'b0;
    end else begin
      x0_r1 <= x0;     x1_r1 <= x1;
      x0_r2 <= x0_r1;  x1_r2 <= x1_r1;
      x0_r3 <= x0_r2;  x1_r3 <= x1_r2;
      f0_r  <= f0_c;   f1_r  <= f1_c;
      o_r   <= o_c;
      vd    <= vd_c;   vd_sat <= sat_c;  div_by_zero <= dbz_c;
    end
  end

endmodule
