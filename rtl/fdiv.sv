// fdiv: IEEE-754 single-precision divider for the defuzzification ratio.
//
// q = a / b. The 24-bit significands (hidden bit restored) are divided by a
// combinational restoring divider producing 26 quotient bits; the quotient
// is normalised by at most one position and truncated to 23 mantissa bits
// (round toward zero). Exponent: ea - eb + 127, minus one if normalisation
// shifted. Combinational.
//
// Domain: the operands come from the fixed-to-float converters, so they are
// zero or normal numbers; infinities, NaNs and denormals are not handled.
// A zero dividend gives +0. A zero divisor gives +0 and raises div_by_zero.
// A result exponent below 1 flushes to zero and above 254 clamps to the
// largest finite value; neither happens for the operands seen here.
// That the ratio is taken in float32 is published; the divider's insides
// and rounding are this design's own.
module fdiv
  import fuzzy_pkg::*;
(
  input  float32_t a,
  input  float32_t b,
  output float32_t q,
  output logic     div_by_zero
);

  logic [23:0] ma, mb;
  logic [24:0] rem;
  logic [25:0] quo;
  logic signed [9:0] ex;

  always_comb begin
    ma  = {1'b1, a.man};
    mb  = {1'b1, b.man};
    // restoring division: integer bit, then 25 fraction bits
    quo = '0;
    rem = {1'b0, ma};
    if (rem >= {1'b0, mb}) begin
      quo[25] = 1'b1;
      rem     = rem - {1'b0, mb};
    end
    for (int i = 24; i >= 0; i--) begin
      rem = {rem[23:0], 1'b0};
      if (rem >= {1'b0, mb}) begin
        quo[i] = 1'b1;
        rem    = rem - {1'b0, mb};
      end
    end
    ex = $signed({2'b00, a.exp}) - $signed({2'b00, b.exp}) + 10'sd127;

    div_by_zero = (b.exp == 8'd0);
    q           = '0;
    if (a.exp != 8'd0 && b.exp != 8'd0) begin
      q.sign = a.sign ^ b.sign;
      if (quo[25]) begin
        q.man = quo[24:2];
      end else begin
        q.man = quo[23:1];
        ex    = ex - 10'sd1;
      end
      if (ex < 10'sd1) begin
        q = '0;
      end else if (ex > 10'sd254) begin
        q.exp = 8'd254;
        q.man = '1;
      end else begin
        q.exp = ex[7:0];
      end
    end
  end

endmodule
