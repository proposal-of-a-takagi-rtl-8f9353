// mfm: Membership Function Module, the fuzzification stage of the TS-FIMM.
//
// One membership function group per input: MFG-0 turns x0[sV.N] into the F0
// degrees f0[l][uN.N], MFG-1 turns x1[sV.N] into the F1 degrees f1[k][uN.N].
// All F0+F1 functions run in parallel; the module is combinational.
// Structure as published; F0 = F1 = 7.
module mfm
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
  output logic        [N-1:0] f0 [F0],
  output logic        [N-1:0] f1 [F1]
);

  mfg #(.N(N), .T(T), .FI(F0)) u_mfg0 (.x(x0), .f(f0));
  mfg #(.N(N), .T(T), .FI(F1)) u_mfg1 (.x(x1), .f(f1));

endmodule
