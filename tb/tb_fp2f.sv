// tb_fp2f: self-checking testbench for the fixed-to-float32 converter.
// A signed 25-bit and an unsigned 23-bit instance (16 fractional bits, the
// widths of a and b at N=16) get random and corner values; the float bits
// must equal the value's float32 encoding with the significand truncated.
module tb_fp2f;
  localparam int FRAC = 16;
  `include "tb_fuzzy_ref.svh"

  logic [24:0] fa;
  logic [22:0] fb;
  logic [31:0] fla, flb;
  int checks = 0, failures = 0;

  fp2f #(.IW(25), .FRAC(FRAC), .SIGNED(1'b1)) u_a (.fx(fa), .fl(fla));
  fp2f #(.IW(23), .FRAC(FRAC), .SIGNED(1'b0)) u_b (.fx(fb), .fl(flb));

  task automatic chk(string nm, logic [31:0] got, real v);
    logic [31:0] e;
    e = ref_f32_trunc(v);
    checks++;
    if (got !== e) begin
      failures++;
      if (failures < 10) $display("FAIL %s v=%g got=%h exp=%h", nm, v, got, e);
    end
  endtask

  task automatic apply(logic [24:0] a, logic [22:0] b);
    fa = a; fb = b;
    #1;
    chk("signed", fla, real'($signed(fa)) / (2.0 ** FRAC));
    chk("unsigned", flb, real'(fb) / (2.0 ** FRAC));
  endtask

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    apply('0, '0);
    apply(25'h1000000, 23'h7fffff);     // most negative, largest unsigned
    apply(25'h0ffffff, 23'h000001);
    apply(25'h1ffffff, 23'h010000);     // -2^-16, 1.0
    for (int i = 0; i < 25; i++) apply(25'(1) << i, 23'(1) << (i % 23));
    for (int i = 0; i < 5000; i++) apply(25'($urandom) >> ($urandom % 25), 23'($urandom) >> ($urandom % 23));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
