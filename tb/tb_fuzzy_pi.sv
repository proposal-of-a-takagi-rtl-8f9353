// tb_fuzzy_pi: end-to-end closed-loop testbench of the Fuzzy-PI controller
// with every parameter at its default (N=16, T=10, Kp=2000, Ki=0.1,
// one-shot TS-FIMM).
//
// Phase 1 (open loop, the actuator blocked): y is held at 0 while the set
// point is +0.5 rad and then -0.5 rad, so the integrator must run into
// v_max and then v_min. Phase 2 (closed loop): the controller drives a
// simple integrating plant model, y(n+1) = y(n) + KPLANT * r(n) (angle in
// radians, KPLANT = 4e-4 rad per sample at full command), through the
// set-point sequence 90, 0, 45, -45, 90 degrees of the robot-arm joint 1
// trajectory, SEG = 200000 samples (2 s at a 10 us sample time) each.
// Every sample of both phases is checked:
//   x0, x1  exactly, against a 64-bit integer model of the input stage
//   vd      within TOL LSB of the real-valued Takagi-Sugeno reference
//           applied to the x0, x1 of the same sample (LAT samples earlier
//           for the pipelined variant)
//   r       exactly, against clamp(vd + r(n-1), -1, +1)
// At the end of every segment the angle must have settled within 0.02 rad.
// Mechanisms counted (each must occur): Kp-path saturation of x0, clamping
// of r at v_max and at v_min, set-point changes.
module tb_fuzzy_pi;
  localparam bit  PIPE = 1'b0;
  localparam int  N = 16, M = 19, G = 18, TOL = 8, SEG = 200000, OPEN = 1000;
  localparam int  LAT = PIPE ? 4 : 0;
  localparam real KPLANT = 4.0e-4;
  localparam longint KPQ = 2000 * 65536, KIQ = 6554, ONE = 65536;
  `include "tb_fuzzy_ref.svh"

  logic clk = 1'b0, rst_n = 1'b0;
  logic signed [M-1:0] y_sp, y;
  logic signed [G-1:0] r;
  logic signed [N:0]   x0, x1, vd;
  logic [4:0] status;

  fuzzy_pi dut (.clk(clk), .rst_n(rst_n), .y_sp(y_sp), .y(y), .r(r),
                .x0(x0), .x1(x1), .vd(vd), .status(status));

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int n_xsat = 0, n_rhi = 0, n_rlo = 0, n_sp = 0;
  real maxerr = 0.0;

  function automatic longint sat(longint v, int bits);
    longint hi, lo;
    hi = (longint'(1) << (bits - 1)) - 1;
    lo = -(longint'(1) << (bits - 1));
    return (v > hi) ? hi : (v < lo) ? lo : v;
  endfunction

  task automatic fail(string msg);
    failures++;
    if (failures < 10) $display("FAIL %s", msg);
  endtask

  initial begin
    #200000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real sp_deg [5] = '{90.0, 0.0, 45.0, -45.0, 90.0};
    real th, ts_q [$];
    longint e_prev, r_prev;
    th = 0.0; e_prev = 0; r_prev = 0;
    y_sp = '0; y = '0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int s = -2; s < 5; s++) begin
      n_sp++;
      if (s < 0) y_sp = M'(longint'((s == -2) ? ONE / 2 : -ONE / 2));
      else       y_sp = M'(longint'($rtoi(sp_deg[s] * 3.14159265358979 / 180.0 * ONE)));
      for (int n = 0; n < ((s < 0) ? OPEN : SEG); n++) begin
        longint e, ed, ex0, ex1, v, er;
        real rr, err;
        y = M'(longint'($rtoi(th * ONE)));
        #1;
        // input stage
        e   = sat(longint'(y_sp) - longint'(y), M);
        ed  = sat(e - e_prev, M);
        ex0 = sat((ed * KPQ) >>> N, N + 1);
        ex1 = sat((e * KIQ) >>> N, N + 1);
        checks++;
        if (longint'(x0) != ex0 || longint'(x1) != ex1) fail($sformatf("x s=%0d n=%0d", s, n));
        if (ex0 != (ed * KPQ) >>> N) n_xsat++;
        // inference
        ts_q.push_back(ref_ts(real'(x0) / 2.0 ** N, real'(x1) / 2.0 ** N) * 2.0 ** N);
        if (ts_q.size() > LAT) begin
          rr  = ts_q.pop_front();
          err = ref_abs(real'(vd) - rr);
          if (err > maxerr) maxerr = err;
          checks++;
          if (err > TOL) fail($sformatf("vd s=%0d n=%0d vd=%0d ref=%f", s, n, vd, rr));
        end
        // integration
        v  = longint'(vd) + r_prev;
        er = (v > ONE) ? ONE : (v < -ONE) ? -ONE : v;
        if (v > ONE)  n_rhi++;
        if (v < -ONE) n_rlo++;
        checks++;
        if (longint'(r) != er) fail($sformatf("r s=%0d n=%0d r=%0d exp=%0d", s, n, r, er));
        @(negedge clk);
        e_prev = e;
        r_prev = er;
        if (s >= 0) th = th + KPLANT * real'(r) / ONE;
      end
      if (s < 0) continue;
      checks++;
      if (ref_abs(th - real'(y_sp) / ONE) > 0.02)
        fail($sformatf("segment %0d did not settle: angle %f target %f", s, th, real'(y_sp) / ONE));
      $display("segment %0d: set point %f rad, angle %f rad", s, real'(y_sp) / ONE, th);
    end
    $display("mechanisms: x0 saturated %0d, r at v_max %0d, r at v_min %0d, set-point changes %0d",
             n_xsat, n_rhi, n_rlo, n_sp);
    $display("max vd error %f LSB", maxerr);
    if (n_xsat == 0) fail("x0 saturation never happened");
    if (n_rhi == 0)  fail("r never clamped at v_max");
    if (n_rlo == 0)  fail("r never clamped at v_min");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
