// fp2f: fixed-point to IEEE-754 single-precision converter (FP2F).
//
// Converts an IW-bit fixed-point number with FRAC fractional bits (two's
// complement when SIGNED = 1, unsigned otherwise) into a float32: the value
// is split into sign and magnitude, a leading-one detector gives the
// exponent, and the magnitude is shifted so the leading one becomes the
// hidden bit. Mantissa bits beyond the 23 that fit are truncated (round
// toward zero). Zero gives +0. Combinational.
//
// That a conversion to float32 sits between the fixed-point sums and the
// divider is published; the converter's insides are this design's own,
// the simplest form that does the job. The exponent never leaves the normal
// range for IW - FRAC < 128 and FRAC < 126, which holds for all sizes here.
module fp2f
  import fuzzy_pkg::*;
#(
  parameter int IW     = 25,
  parameter int FRAC   = 16,
  parameter bit SIGNED = 1'b1
) (
  input  logic [IW-1:0] fx,
  output float32_t      fl
);

  localparam int PW = $clog2(IW + 1);

  logic          neg;
  logic [IW-1:0] mag;
  logic [PW-1:0] lead;
  logic          nz;
  logic [IW+23:0] ext;

  always_comb begin
    neg  = SIGNED && fx[IW-1];
    mag  = neg ? (~fx + 1'b1) : fx;
    lead = '0;
    nz   = 1'b0;
    for (int i = 0; i < IW; i++) begin
      if (mag[i]) begin
        lead = PW'(i);
        nz   = 1'b1;
      end
    end
    ext = {mag, 24'b0} << (PW'(IW - 1) - lead);   // leading one to bit IW+23
    if (!nz) begin
      fl = '0;
    end else begin
      fl.sign = neg;
      fl.exp  = 8'(int'(lead) - FRAC + 127);
      fl.man  = ext[IW+22 -: 23];
    end
  end

endmodule
