// tb_mfm: self-checking testbench for the membership function module at
// the default size (N=16, T=10). Random pairs (x0, x1); all fourteen
// degrees must be within one LSB of the reference.
module tb_mfm;
  localparam int N = 16, T = 10;
  `include "tb_fuzzy_ref.svh"

  logic signed [N:0] x0, x1;
  logic [N-1:0] f0 [7];
  logic [N-1:0] f1 [7];
  int checks = 0, failures = 0;

  mfm dut (.x0(x0), .x1(x1), .f0(f0), .f1(f1));

  task automatic chk(int j, logic signed [N:0] x, logic [N-1:0] got);
    int e, d;
    e = int'($floor(ref_mu(j, real'(x) / (2.0 ** N)) * (2.0 ** N)));
    if (e > (1 << N) - 1) e = (1 << N) - 1;
    d = int'(got) - e;
    checks++;
    if (d > 1 || d < -1) begin
      failures++;
      if (failures < 10) $display("FAIL j=%0d x=%0d got=%0d exp=%0d", j, x, got, e);
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
    for (int it = 0; it < 3000; it++) begin
      x0 = (N+1)'($urandom);
      x1 = (N+1)'($urandom);
      #1;
      for (int j = 0; j < 7; j++) begin
        chk(j, x0, f0[j]);
        chk(j, x1, f1[j]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
