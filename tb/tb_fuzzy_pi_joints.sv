// tb_fuzzy_pi_joints: three-joint closed-loop run of the Fuzzy-PI
// controller at three word sizes.
//
// Reproduces the shape of the controller's validation experiment: one
// controller per joint of a three-joint arm, sample time 10 us,
// Kp = 2000, Ki = 0.1, a 10 s trajectory whose set points change every
// 2 s:
//   joint 1:  90, 0, 45, -45, 90 degrees
//   joint 2:  45, 45, 0, 22.5, 45 degrees
//   joint 3:  45, 22.5, 0, 22.5, 45 degrees
// run at N = 12, 14 and 16 (T = 10, one-shot core), so nine controllers
// run side by side. The arm's dynamics are not modelled; every joint is
// the same integrating model th(n+1) = th(n) + KPLANT * r(n), starting at 0.
// Checks, per controller:
//   r        exactly, every sample, against clamp(vd + r(n-1), -1, +1)
//   settling the angle within 0.02 rad of the set point at the end of
//            every 2 s segment
// The largest difference between the N = 12 or 14 trajectory and the
// N = 16 one is reported; over the last quarter of every segment, after
// the transient, it must stay below 0.025 rad.
module tb_fuzzy_pi_joints;
  localparam int  NJ = 3, NW = 3, NI = NJ * NW;
  localparam int  NN [NW] = '{12, 14, 16};
  localparam int  SEG = 200000;
  localparam real KPLANT = 4.0e-4;
  localparam real DEG = 3.14159265358979 / 180.0;
  localparam real SP [NJ][5] = '{'{90.0, 0.0, 45.0, -45.0, 90.0},
                                 '{45.0, 45.0, 0.0, 22.5, 45.0},
                                 '{45.0, 22.5, 0.0, 22.5, 45.0}};

  logic clk = 1'b0, rst_n = 1'b0;
  // Buses sized for the widest instance (N = 16: M = 19, V = 17, G = 18).
  logic signed [18:0] y_sp [NI], y [NI];
  logic signed [17:0] r [NI];
  logic signed [16:0] vd [NI];

  for (genvar i = 0; i < NI; i++) begin : g_c
    localparam int N = NN[i % NW];
    logic signed [N+2:0] r_n;
    logic signed [N:0]   x0_n, x1_n, vd_n;
    logic [4:0]          st_n;
    fuzzy_pi #(.N(N)) u_c (
      .clk(clk), .rst_n(rst_n), .y_sp(y_sp[i][N+2:0]), .y(y[i][N+2:0]),
      .r(r_n[N+1:0]), .x0(x0_n), .x1(x1_n), .vd(vd_n), .status(st_n));
    assign r_n[N+2] = r_n[N+1];
    assign r[i]  = 18'(r_n);
    assign vd[i] = 17'(vd_n);
  end

  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  task automatic fail(string msg);
    failures++;
    if (failures < 10) $display("FAIL %s", msg);
  endtask

  initial begin
    #100000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real    th [NI];
    longint r_prev [NI];
    real    maxdev, maxdev_ss;
    maxdev = 0.0; maxdev_ss = 0.0;
    foreach (th[i]) begin
      th[i] = 0.0; r_prev[i] = 0; y_sp[i] = '0; y[i] = '0;
    end
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int s = 0; s < 5; s++) begin
      for (int i = 0; i < NI; i++)
        y_sp[i] = 19'(longint'($rtoi(SP[i / NW][s] * DEG * 2.0 ** NN[i % NW])));
      for (int n = 0; n < SEG; n++) begin
        for (int i = 0; i < NI; i++) y[i] = 19'(longint'($rtoi(th[i] * 2.0 ** NN[i % NW])));
        #1;
        for (int i = 0; i < NI; i++) begin
          longint one, v, er;
          one = longint'(1) << NN[i % NW];
          v   = longint'(vd[i]) + r_prev[i];
          er  = (v > one) ? one : (v < -one) ? -one : v;
          checks++;
          if (longint'(r[i]) != er)
            fail($sformatf("r joint %0d N=%0d n=%0d: %0d expected %0d", i / NW + 1, NN[i % NW], n,
                           r[i], er));
          r_prev[i] = er;
        end
        @(negedge clk);
        for (int i = 0; i < NI; i++) th[i] += KPLANT * real'(r[i]) / 2.0 ** NN[i % NW];
        for (int i = 0; i < NI; i++)
          if (i % NW != NW - 1) begin
            real d;
            d = th[i] - th[i - (i % NW) + NW - 1];
            if (d < 0) d = -d;
            if (d > maxdev) maxdev = d;
            if (n >= SEG * 3 / 4 && d > maxdev_ss) maxdev_ss = d;
          end
      end
      for (int i = 0; i < NI; i++) begin
        real d;
        d = th[i] - SP[i / NW][s] * DEG;
        if (d < 0) d = -d;
        checks++;
        if (d > 0.02) fail($sformatf("joint %0d N=%0d segment %0d: angle %f target %f",
                                     i / NW + 1, NN[i % NW], s, th[i], SP[i / NW][s] * DEG));
      end
      $display("t = %0d s: joint angles (deg) N=12/14/16: %6.2f %6.2f %6.2f | %6.2f %6.2f %6.2f | %6.2f %6.2f %6.2f",
               2 * (s + 1), th[0] / DEG, th[1] / DEG, th[2] / DEG, th[3] / DEG, th[4] / DEG,
               th[5] / DEG, th[6] / DEG, th[7] / DEG, th[8] / DEG);
    end
    $display("largest deviation from the N=16 trajectory: %f rad (transients), %f rad (settled)",
             maxdev, maxdev_ss);
    checks++;
    if (maxdev_ss > 0.025) fail("settled word-size deviation above 0.025 rad");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
