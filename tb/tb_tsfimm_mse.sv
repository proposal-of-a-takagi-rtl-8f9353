// tb_tsfimm_mse: accuracy sweep of the one-shot TS-FIMM over word sizes.
//
// Reproduces the accuracy experiment of the controller's evaluation: the
// inference is evaluated on Z = 10000 points, a 100 x 100 grid spread evenly
// over [-1, 1] for both inputs, and the mean square error against a
// double-precision evaluation of the same Takagi-Sugeno system is reported:
//   MSE = 1/Z * sum (v_ref - v_d)^2
// Six instances with different (N, T) run side by side on the same grid:
// (8, 4), (8, 10), (10, 6), (12, 8), (14, 4) and (16, 10), covering every
// N of the published sweep and both ends of its T range. Each grid point is first quantised
// to the instance's [sV.N] input format (floor, clipped to 1 - 2^-N); the
// reference is taken at the exact grid point, so input quantisation counts
// as error, as it does for a real converter. A point fails if its error
// exceeds TOL_LSB LSB of that instance; a size fails if its RMS error
// exceeds 2 LSB. The published MSE values for the same sizes (2.4e-6 at
// N=8, 1.3e-7 at N=10, 7.2e-9 at N=12, 4.9e-10 at N=14, 2.7e-11 at N=16) were measured against a different
// rule base and are printed for comparison only.
module tb_tsfimm_mse;
  localparam int NS = 6;
  localparam int NN [NS] = '{8, 8, 10, 12, 14, 16};
  localparam int TT [NS] = '{4, 10, 6, 8, 4, 10};
  localparam real PAPER_MSE [NS] = '{2.4e-6, 2.4e-6, 1.3e-7, 7.2e-9, 4.9e-10, 2.7e-11};
  localparam int GRID = 100, TOL_LSB = 8;
  `include "tb_fuzzy_ref.svh"

  // Widest instance is N = 16; every bus is sized for it.
  logic signed [16:0] x0 [NS], x1 [NS], vd [NS];
  logic               vd_sat [NS], dbz [NS];
  int checks = 0, failures = 0;

  for (genvar s = 0; s < NS; s++) begin : g_dut
    localparam int N = NN[s];
    logic signed [N:0] vd_n;
    tsfimm_os #(.N(N), .T(TT[s])) u_dut (
      .x0(x0[s][N:0]), .x1(x1[s][N:0]), .vd(vd_n),
      .vd_sat(vd_sat[s]), .div_by_zero(dbz[s]));
    assign vd[s] = 17'(vd_n);
  end

  // Floor of x * 2^n, clipped to the [s(n+1).n] range.
  function automatic logic signed [16:0] quant(real x, int n);
    real v;
    v = x * 2.0 ** n;
    if (v >= 2.0 ** n) v = 2.0 ** n - 1.0;
    return 17'(longint'($floor(v)));
  endfunction

  initial begin
    #100000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real sse [NS];
    real maxe [NS];
    foreach (sse[s]) begin sse[s] = 0.0; maxe[s] = 0.0; end
    for (int i = 0; i < GRID; i++)
      for (int j = 0; j < GRID; j++) begin
        real a, b, r;
        a = -1.0 + 2.0 * i / (GRID - 1);
        b = -1.0 + 2.0 * j / (GRID - 1);
        for (int s = 0; s < NS; s++) begin
          x0[s] = quant(a, NN[s]);
          x1[s] = quant(b, NN[s]);
        end
        #1;
        r = ref_ts(a, b);
        for (int s = 0; s < NS; s++) begin
          real d, lsb;
          lsb = 2.0 ** (-NN[s]);
          d = real'(vd[s]) * lsb - r;
          sse[s] += d * d;
          if (ref_abs(d) / lsb > maxe[s]) maxe[s] = ref_abs(d) / lsb;
          checks++;
          if (ref_abs(d) > TOL_LSB * lsb || dbz[s] || vd_sat[s]) begin
            failures++;
            if (failures < 10)
              $display("FAIL N=%0d T=%0d x0=%f x1=%f vd=%f ref=%f", NN[s], TT[s], a, b,
                       real'(vd[s]) * lsb, r);
          end
        end
      end
    for (int s = 0; s < NS; s++) begin
      real mse;
      mse = sse[s] / (GRID * GRID);
      $display("N=%0d T=%0d: MSE %e (%f LSB^2), max error %f LSB; published %e",
               NN[s], TT[s], mse, mse * 2.0 ** (2 * NN[s]), maxe[s], PAPER_MSE[s]);
      checks++;
      if (mse > 4.0 * 2.0 ** (-2 * NN[s])) begin
        failures++;
        $display("FAIL N=%0d T=%0d: RMS error above 2 LSB", NN[s], TT[s]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
