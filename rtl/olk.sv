// olk: rule operation unit O-lk, the fuzzy AND of one rule.
//
// o = min(f0, f1) for the l-th degree of input 0 and the k-th degree of
// input 1, all [uN.N]. Built as published: a magnitude comparator (f0 > f1)
// drives the select of a 2:1 multiplexer whose input 0 is f0 and input 1 is
// f1. Combinational.
module olk #(
  parameter int N = 16
) (
  input  logic [N-1:0] f0,
  input  logic [N-1:0] f1,
  output logic [N-1:0] o
);

  logic sel;

  always_comb begin
    sel = (f0 > f1);
    o   = sel ? f1 : f0;
  end

endmodule
