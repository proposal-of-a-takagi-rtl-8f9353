// tb_tsfimm_os: self-checking testbench for the one-shot TS-FIMM at the
// default size (N=16, T=10). Random and corner (x0, x1); the output,
// available in the same time step (no clock), must be within TOL LSB of
// the real-valued Takagi-Sugeno reference.
module tb_tsfimm_os;
  localparam int N = 16, TOL = 8;
  `include "tb_fuzzy_ref.svh"

  logic signed [N:0] x0, x1, vd;
  logic vd_sat, dbz;
  int checks = 0, failures = 0;
  real maxerr = 0.0;

  tsfimm_os dut (.x0(x0), .x1(x1), .vd(vd), .vd_sat(vd_sat), .div_by_zero(dbz));

  task automatic apply(logic signed [N:0] a, logic signed [N:0] b);
    real r, err;
    x0 = a; x1 = b;
    #1;
    r   = ref_ts(real'(x0) / 2.0 ** N, real'(x1) / 2.0 ** N) * 2.0 ** N;
    err = ref_abs(real'(vd) - r);
    if (err > maxerr) maxerr = err;
    checks++;
    if (err > TOL || dbz) begin
      failures++;
      if (failures < 10) $display("FAIL x0=%0d x1=%0d vd=%0d ref=%f", x0, x1, vd, r);
    end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    apply(17'h10000, 17'h10000); apply(17'h0ffff, 17'h0ffff); apply('0, '0);
    for (int i = -4; i <= 3; i++)
      for (int j = -4; j <= 3; j++) apply(17'(i * 16384), 17'(j * 16384));
    for (int i = 0; i < 3000; i++) apply(17'($urandom), 17'($urandom));
    $display("tsfimm_os: max error %f LSB", maxerr);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
