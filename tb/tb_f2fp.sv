// tb_f2fp: self-checking testbench for the float32 to [sV.N] converter
// (N=16). Random floats around the range [-1, 1): the result must be the
// value times 2^N truncated toward zero, saturated to [-2^N, 2^N-1] with
// the sat flag set when clipping happened.
module tb_f2fp;
  localparam int N = 16;
  `include "tb_fuzzy_ref.svh"

  logic [31:0] fl;
  logic signed [N:0] fx;
  logic sat;
  int checks = 0, failures = 0, nsat = 0;

  f2fp #(.N(N)) dut (.fl(fl), .fx(fx), .sat(sat));

  task automatic apply(logic [31:0] f);
    real v;
    longint e;
    logic es;
    fl = f;
    #1;
    v  = ref_f32(f) * (2.0 ** N);
    es = 1'b0;
    if (v >= 2.0 ** N)          begin e = (longint'(1) << N) - 1; es = 1'b1; end
    else if (v < -(2.0 ** N))   begin e = -(longint'(1) << N);    es = 1'b1; end
    else                        e = longint'($rtoi(v));
    checks++;
    if (longint'(fx) != e || sat != es) begin
      failures++;
      if (failures < 10) $display("FAIL f=%h fx=%0d sat=%b exp=%0d/%b", f, fx, sat, e, es);
    end
    if (sat) nsat++;
  endtask

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    apply(32'h0); apply(32'h3f800000); apply(32'hbf800000); apply(32'hbf800001);
    apply(32'h3f7fffff); apply(32'h37800000); apply(32'h37000000);
    for (int i = 0; i < 5000; i++) apply({1'($urandom), 8'($urandom_range(100, 130)), 23'($urandom)});
    if (nsat == 0) begin failures++; $display("FAIL saturation never exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
