// om: Operation Module, the rule-evaluation stage of the TS-FIMM.
//
// Holds F0*F1 O-lk units in parallel, one per rule. Rule g = l*F1 + k
// combines degree l of input 0 with degree k of input 1:
//   o[g] = min(f0[l], f1[k])      all [uN.N]
// Combinational. The full rule grid (every pair of terms) is as published;
// the index order g = l*F1 + k equals the published l*F0 + k for F0 = F1.
module om #(
  parameter int  N  = 16,
  parameter int  F0 = 7,
  parameter int  F1 = 7,
  localparam int R  = F0 * F1
) (
  input  logic [N-1:0] f0 [F0],
  input  logic [N-1:0] f1 [F1],
  output logic [N-1:0] o  [R]
);

  for (genvar l = 0; l < F0; l++) begin : g_l
    for (genvar k = 0; k < F1; k++) begin : g_k
      olk #(.N(N)) u_olk (.f0(f0[l]), .f1(f1[k]), .o(o[l*F1 + k]));
    end
  end

endmodule
