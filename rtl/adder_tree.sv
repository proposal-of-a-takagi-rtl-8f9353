// adder_tree: balanced binary tree of two-input adders.
//
// Sums COUNT operands of IN_W bits into one OUT_W-bit result. The operands
// are extended to OUT_W bits (sign-extended when SIGNED is 1, zero-extended
// otherwise) and added pairwise, level by level, ceil(log2(COUNT)) levels
// deep; missing leaves of the last pair are zero. Combinational. OUT_W must
// be at least IN_W + ceil(log2(COUNT)) for the sum not to wrap.
// Shared by the numerator and denominator modules.
module adder_tree #(
  parameter int COUNT  = 49,
  parameter int IN_W   = 19,
  parameter int OUT_W  = 25,
  parameter bit SIGNED = 1'b1
) (
  input  logic [IN_W-1:0]  in  [COUNT],
  output logic [OUT_W-1:0] sum
);

  localparam int LEVELS = (COUNT > 1) ? $clog2(COUNT) : 1;
  localparam int LEAVES = 1 << LEVELS;

  // Pairwise reduction in place: after level lvl, t[i] holds the sum of
  // leaves i*2^(lvl+1) .. (i+1)*2^(lvl+1)-1.
  logic [OUT_W-1:0] t [LEAVES];

  always_comb begin
    for (int i = 0; i < LEAVES; i++) begin
      if (i >= COUNT)   t[i] = '0;
      else if (SIGNED)  t[i] = OUT_W'($signed(in[i]));
      else              t[i] = OUT_W'(in[i]);
    end
    for (int lvl = 0; lvl < LEVELS; lvl++) begin
      for (int i = 0; i < (LEAVES >> (lvl + 1)); i++) begin
        t[i] = t[2*i] + t[2*i+1];
      end
    end
    sum = t[0];
  end

endmodule
