// f2fp: IEEE-754 single-precision to fixed-point [sV.N] converter (F2FP).
//
// Converts the float32 quotient back into the [sV.N] format of the
// controller (V = N+1, range [-1, 1-2^-N]). The significand is shifted to
// N fractional bits and truncated toward zero, then negated for a negative
// sign. Magnitudes of 1 or more saturate (to 1-2^-N, or to -1 for negative
// values) and raise sat. Zero and denormal inputs give 0. Combinational.
//
// The conversion itself is published; its insides, the truncation and the
// saturation guard are this design's own.
module f2fp
  import fuzzy_pkg::*;
#(
  parameter int  N = 16,
  localparam int V = w_v(N)
) (
  input  float32_t            fl,
  output logic signed [V-1:0] fx,
  output logic                sat
);

  localparam int XW = 24 + N;

  logic [XW-1:0] wide;
  logic [8:0]    rs;
  logic [N-1:0]  mag;

  always_comb begin
    sat  = 1'b0;
    wide = XW'({1'b1, fl.man}) << N;
    rs   = 9'd150 - {1'b0, fl.exp};          // right shift for exp < 127
    mag  = '0;
    if (fl.exp == 8'd0) begin
      fx = '0;
    end else if (fl.exp >= 8'd127) begin
      if (fl.sign) begin
        fx  = {1'b1, {N{1'b0}}};             // -1
        sat = !(fl.exp == 8'd127 && fl.man == '0);
      end else begin
        fx  = {1'b0, {N{1'b1}}};             // 1 - 2^-N
        sat = 1'b1;
      end
    end else begin
      mag = (rs >= 9'(XW)) ? '0 : N'(wide >> rs);
      fx  = fl.sign ? -$signed({1'b0, mag}) : $signed({1'b0, mag});
    end
  end

endmodule
