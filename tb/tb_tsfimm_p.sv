// tb_tsfimm_p: self-checking testbench for the pipelined TS-FIMM at the
// default size (N=16, T=10). A new random (x0, x1) is presented every clock;
// vd must match the real-valued reference of the input presented exactly
// LAT = 4 clocks earlier (within TOL LSB). Because consecutive inputs
// differ, a latency of 3 or 5 would fail. After reset vd must be zero.
module tb_tsfimm_p;
  localparam int N = 16, TOL = 8, LAT = 4, NS = 3000;
  `include "tb_fuzzy_ref.svh"

  logic clk = 1'b0, rst_n = 1'b0;
  logic signed [N:0] x0, x1, vd;
  logic vd_sat, dbz;
  real ref_q [$];
  int checks = 0, failures = 0;

  tsfimm_p dut (.clk(clk), .rst_n(rst_n), .x0(x0), .x1(x1), .vd(vd), .vd_sat(vd_sat), .div_by_zero(dbz));

  always #5 clk = ~clk;

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    x0 = '0; x1 = '0;
    repeat (2) @(posedge clk);
    #1;
    checks++;
    if (vd !== '0) begin failures++; $display("FAIL vd not zero in reset"); end
    rst_n = 1'b1;
    for (int n = 0; n < NS + LAT; n++) begin
      @(negedge clk);
      if (n >= LAT) begin
        real r, err;
        r   = ref_q.pop_front();
        err = ref_abs(real'(vd) - r);
        checks++;
        if (err > TOL) begin
          failures++;
          if (failures < 10) $display("FAIL n=%0d vd=%0d ref=%f", n, vd, r);
        end
      end
      x0 = 17'($urandom);
      x1 = 17'($urandom);
      ref_q.push_back(ref_ts(real'(x0) / 2.0 ** N, real'(x1) / 2.0 ** N) * 2.0 ** N);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
