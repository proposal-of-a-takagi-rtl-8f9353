// tb_fdiv: self-checking testbench for the float32 divider. Random normal
// operands; the quotient must equal the float32 truncation of the exact
// quotient (computed in double precision, whose error is far below the
// distance to the next truncation boundary). Zero dividend and zero divisor
// are checked too.
module tb_fdiv;
  `include "tb_fuzzy_ref.svh"

  logic [31:0] a, b, q;
  logic dbz;
  int checks = 0, failures = 0;

  fdiv dut (.a(a), .b(b), .q(q), .div_by_zero(dbz));

  function automatic logic [31:0] rnd_float();
    return {1'($urandom), 8'($urandom_range(90, 160)), 23'($urandom)};
  endfunction

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 5000; i++) begin
      logic [31:0] e;
      a = rnd_float();
      b = rnd_float();
      if (i == 0) b = a;
      if (i == 1) b = {a[31:23], 23'h7fffff};
      #1;
      e = ref_f32_trunc(ref_f32(a) / ref_f32(b));
      checks++;
      if (q !== e || dbz) begin
        failures++;
        if (failures < 10) $display("FAIL a=%h b=%h q=%h exp=%h", a, b, q, e);
      end
    end
    a = 32'h0; b = 32'h3f800000; #1;
    checks++; if (q !== 32'h0 || dbz) failures++;
    a = 32'h3f800000; b = 32'h0; #1;
    checks++; if (q !== 32'h0 || !dbz) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
