// tb_wm: self-checking testbench for a weighting unit WM-g (N=16) with
// coefficients A=0.5, B=-0.25, C=0.125. The expected a = floor(o*(A*x0 +
// B*x1 + C) * 2^N) is computed in 64-bit integer arithmetic.
module tb_wm;
  localparam int N = 16;
  localparam longint A = 32768, B = -16384, C = 8192;   // [sV.N] codes

  logic signed [N:0]   x0, x1;
  logic        [N-1:0] o;
  logic signed [N+2:0] a;
  int checks = 0, failures = 0;

  wm #(.N(N), .A_G(17'(A)), .B_G(17'(B)), .C_G(17'(C))) dut (.x0(x0), .x1(x1), .o(o), .a(a));

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int it = 0; it < 5000; it++) begin
      longint cons, prod, e;
      x0 = (N+1)'($urandom);
      x1 = (N+1)'($urandom);
      o  = N'($urandom);
      if (it == 0) begin x0 = 17'h10000; x1 = 17'h0FFFF; o = '1; end
      #1;
      cons = longint'(x0) * A + longint'(x1) * B + (C <<< N);
      prod = cons * longint'({1'b0, o});
      e    = prod >>> (2 * N);
      checks++;
      if (longint'(a) != e) begin
        failures++;
        if (failures < 10) $display("FAIL x0=%0d x1=%0d o=%0d a=%0d exp=%0d", x0, x1, o, a, e);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
