// tb_mf: self-checking testbench for a single membership function.
// Three instances (LN right trapezoid, SN triangle, LP left trapezoid) at
// N=16, T=10 are driven with random and swept inputs; each degree must be
// within one LSB of floor(mu(x) * 2^N), clipped to 1 - 2^-N.
module tb_mf;
  import fuzzy_pkg::*;
  localparam int N = 16, T = 10;
  localparam int QU = 1 << (T - 2);   // one quarter in [sW.T] code units
  `include "tb_fuzzy_ref.svh"

  logic signed [N:0] x;
  logic [N-1:0] f_ln, f_sn, f_lp;
  int checks = 0, failures = 0;

  mf #(.N(N), .T(T), .SHAPE(MF_RIGHT_TRAP), .LO(-4*QU), .MID(-3*QU), .HI(-2*QU)) u_ln (.x(x), .f(f_ln));
  mf #(.N(N), .T(T), .SHAPE(MF_TRIANGLE),   .LO(-2*QU), .MID(-1*QU), .HI(0))     u_sn (.x(x), .f(f_sn));
  mf #(.N(N), .T(T), .SHAPE(MF_LEFT_TRAP),  .LO(2*QU),  .MID(3*QU),  .HI(4*QU))  u_lp (.x(x), .f(f_lp));

  function automatic int expq(real mu);
    int q;
    q = int'($floor(mu * (2.0 ** N)));
    return (q > (1 << N) - 1) ? (1 << N) - 1 : q;
  endfunction

  task automatic chk(string nm, logic [N-1:0] got, real mu);
    int e, d;
    e = expq(mu);
    d = int'(got) - e;
    checks++;
    if (d > 1 || d < -1) begin
      failures++;
      if (failures < 10) $display("FAIL %s x=%f got=%0d exp=%0d", nm, real'(x) / 2.0 ** N, got, e);
    end
  endtask

  task automatic apply(logic signed [N:0] v);
    real xr;
    x = v;
    #1;
    xr = real'(x) / (2.0 ** N);
    chk("LN", f_ln, ref_mu(0, xr));
    chk("SN", f_sn, ref_mu(2, xr));
    chk("LP", f_lp, ref_mu(6, xr));
  endtask

  initial begin
    #10000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = -(1 << N); i < (1 << N); i += 97) apply((N+1)'(i));
    for (int q = -4; q <= 3; q++) apply((N+1)'(q * (1 << (N - 2))));  // breakpoints
    for (int i = 0; i < 3000; i++) apply((N+1)'($urandom));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
