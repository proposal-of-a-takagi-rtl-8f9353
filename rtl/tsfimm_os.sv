// tsfimm_os: Takagi-Sugeno fuzzy inference machine, one-shot version.
//
// v_d(n) = TSFIM(x0(n), x1(n)) with no register inside: fuzzification
// (MFM, 2 x 7 membership functions), rule evaluation (OM, 49 min units) and
// defuzzification (OFM) form one combinational path, so the output belongs
// to the same sample as the input. The clock period must cover the whole
// path; in exchange the controller loop sees no added delay.
// Inputs x0, x1 and output v_d are [sV.N]. Structure as published.
module tsfimm_os
  import fuzzy_pkg::*;
#(
  parameter int  N  = 16,
  parameter int  T  = 10,
  parameter int  F0 = NUM_MF,
  parameter int  F1 = NUM_MF,
  localparam int V  = w_v(N)
) (
  input  logic signed [V-1:0] x0,
  input  logic signed [V-1:0] x1,
  output logic signed [V-1:0] vd,
  output logic                vd_sat,
  output logic                div_by_zero
);

  logic [N-1:0] f0 [F0];
  logic [N-1:0] f1 [F1];
  logic [N-1:0] o  [F0*F1];

  mfm #(.N(N), .T(T), .F0(F0), .F1(F1)) u_mfm (.x0(x0), .x1(x1), .f0(f0), .f1(f1));
  om  #(.N(N), .F0(F0), .F1(F1))        u_om  (.f0(f0), .f1(f1), .o(o));
  ofm #(.N(N), .F0(F0), .F1(F1))        u_ofm (.x0(x0), .x1(x1), .o(o), .vd(vd),
                                               .vd_sat(vd_sat), .div_by_zero(div_by_zero));

endmodule
