// tb_im: self-checking testbench for the integration module (N=16, G=18,
// limits -1 and +1). Random v_d streams, biased positive then negative so
// that both limits are reached; r must equal clamp(v_d + r(n-1)) in every
// cycle, with the matching flag, and the clamped value must be what is
// accumulated.
module tb_im;
  localparam int N = 16, G = 18;
  localparam longint ONE = 65536;

  logic clk = 1'b0, rst_n = 1'b0;
  logic signed [N:0]   vd;
  logic signed [G-1:0] r;
  logic sat_hi, sat_lo;
  int checks = 0, failures = 0, n_hi = 0, n_lo = 0;
  longint r_prev = 0;

  im dut (.clk(clk), .rst_n(rst_n), .vd(vd), .r(r), .sat_hi(sat_hi), .sat_lo(sat_lo));

  always #5 clk = ~clk;

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    vd = '0;
    @(negedge clk);
    rst_n = 1'b1;
    for (int n = 0; n < 4000; n++) begin
      longint v, e;
      logic eh, el;
      int bias;
      bias = ((n / 500) % 2 == 0) ? 4000 : -4000;
      vd = 17'(longint'($urandom_range(0, 32768)) - 16384 + bias);
      #1;
      v  = longint'(vd) + r_prev;
      eh = v > ONE;
      el = v < -ONE;
      e  = eh ? ONE : el ? -ONE : v;
      checks++;
      if (longint'(r) != e || sat_hi != eh || sat_lo != el) begin
        failures++;
        if (failures < 10) $display("FAIL n=%0d r=%0d exp=%0d", n, r, e);
      end
      if (eh) n_hi++;
      if (el) n_lo++;
      @(negedge clk);
      r_prev = e;
    end
    $display("im: clamped at v_max %0d, at v_min %0d", n_hi, n_lo);
    if (n_hi == 0 || n_lo == 0) begin failures++; $display("FAIL a limit was never reached"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
