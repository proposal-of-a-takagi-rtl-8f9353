// tb_ipm: self-checking testbench for the input processing module at the
// default parameters (N=16, M=19, Kp=2000, Ki=0.1). Random set points and
// measurements of several magnitudes are applied one per clock; x0, x1
// and the saturation flags are checked against a 64-bit integer model of
// e = sat(y_sp - y), ed = sat(e - e(n-1)), x = sat(floor(K*v / 2^N)).
// Both the saturated and the linear range of the Kp path must occur; with
// Ki = 0.1 and |e| < 4 the Ki path cannot saturate.
module tb_ipm;
  localparam int N = 16, M = 19;
  localparam longint KPQ = 2000 * 65536;
  localparam longint KIQ = 6554;          // round(0.1 * 2^16)

  logic clk = 1'b0, rst_n = 1'b0;
  logic signed [M-1:0] y_sp, y;
  logic signed [N:0]   x0, x1;
  logic x0_sat, x1_sat;
  int checks = 0, failures = 0;
  int n_sat0 = 0, n_lin0 = 0, n_sat1 = 0, n_lin1 = 0;
  longint e_prev = 0;

  ipm dut (.clk(clk), .rst_n(rst_n), .y_sp(y_sp), .y(y), .x0(x0), .x1(x1), .x0_sat(x0_sat), .x1_sat(x1_sat));

  always #5 clk = ~clk;

  function automatic longint sat(longint v, int bits, output logic s);
    longint hi, lo;
    hi = (longint'(1) << (bits - 1)) - 1;
    lo = -(longint'(1) << (bits - 1));
    s = (v > hi) || (v < lo);
    return (v > hi) ? hi : (v < lo) ? lo : v;
  endfunction

  function automatic longint rnd(int bits);
    longint v;
    v = longint'($urandom) & ((longint'(1) << bits) - 1);
    return v - (longint'(1) << (bits - 1));
  endfunction

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    y_sp = '0; y = '0;
    @(negedge clk);
    rst_n = 1'b1;
    for (int n = 0; n < 4000; n++) begin
      longint e, ed, ex0, ex1;
      logic s, s0, s1;
      int mag;
      mag  = (n % 4 == 0) ? M : (n % 4 == 1) ? 6 : (n % 4 == 2) ? 12 : 17;
      if (n % 200 < 100) begin
        y_sp = M'(rnd(mag));
        y    = M'(rnd(mag));
      end else begin
        y    = y + M'(rnd(3));     // slow drift keeps ed small
      end
      #1;
      e   = sat(longint'(y_sp) - longint'(y), M, s);
      ed  = sat(e - e_prev, M, s);
      ex0 = sat((ed * KPQ) >>> N, N + 1, s0);
      ex1 = sat((e * KIQ) >>> N, N + 1, s1);
      checks++;
      if (longint'(x0) != ex0 || longint'(x1) != ex1 || x0_sat != s0 || x1_sat != s1) begin
        failures++;
        if (failures < 10) $display("FAIL n=%0d x0=%0d/%0d x1=%0d/%0d", n, x0, ex0, x1, ex1);
      end
      if (s0) n_sat0++; else n_lin0++;
      if (s1) n_sat1++; else n_lin1++;
      @(negedge clk);
      e_prev = e;
    end
    $display("ipm: x0 saturated %0d / linear %0d, x1 saturated %0d / linear %0d", n_sat0, n_lin0, n_sat1, n_lin1);
    if (n_sat0 == 0 || n_lin0 == 0 || n_lin1 == 0) begin
      failures++;
      $display("FAIL a saturation case was never exercised");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
