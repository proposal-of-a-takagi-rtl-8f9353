// tb_mfg: self-checking testbench for a membership function group at a
// small size (N=8, T=4). Every input code of [sV.N] is applied and each of
// the seven degrees must be within one LSB of floor(mu_j(x) * 2^N).
module tb_mfg;
  localparam int N = 8, T = 4;
  `include "tb_fuzzy_ref.svh"

  logic signed [N:0] x;
  logic [N-1:0] f [7];
  int checks = 0, failures = 0;

  mfg #(.N(N), .T(T), .FI(7)) dut (.x(x), .f(f));

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = -(1 << N); i < (1 << N); i++) begin
      x = (N+1)'(i);
      #1;
      for (int j = 0; j < 7; j++) begin
        int e, d;
        e = int'($floor(ref_mu(j, real'(i) / (2.0 ** N)) * (2.0 ** N)));
        if (e > (1 << N) - 1) e = (1 << N) - 1;
        d = int'(f[j]) - e;
        checks++;
        if (d > 1 || d < -1) begin
          failures++;
          if (failures < 10) $display("FAIL x=%0d j=%0d got=%0d exp=%0d", i, j, f[j], e);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
