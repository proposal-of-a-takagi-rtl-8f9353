// tb_nm: self-checking testbench for the numerator module (N=16, 49
// rules). Random x0, x1 and rule strengths; the expected sum of
// floor(o_g*(A_g*x0 + B_g*x1 + C_g) * 2^N) is formed in 64-bit integers
// from the rule table A_l = 0.5-|l-3|/16, B_k = 0.25+|k-3|/32,
// C_lk = (l+k-6)/64.
module tb_nm;
  localparam int N = 16;

  logic signed [N:0]   x0, x1;
  logic        [N-1:0] o [49];
  logic signed [N+8:0] a;
  int checks = 0, failures = 0;

  nm dut (.x0(x0), .x1(x1), .o(o), .a(a));

  function automatic longint iabs(longint v); return (v < 0) ? -v : v; endfunction

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int it = 0; it < 2000; it++) begin
      longint sum;
      x0 = (N+1)'($urandom);
      x1 = (N+1)'($urandom);
      foreach (o[g]) o[g] = ($urandom_range(0, 3) == 0) ? N'($urandom) : '0;
      if (it == 0) foreach (o[g]) o[g] = '1;
      #1;
      sum = 0;
      for (int l = 0; l < 7; l++)
        for (int k = 0; k < 7; k++) begin
          longint ca, cb, cc, cons;
          ca = (32 - 4 * iabs(l - 3)) <<< (N - 6);
          cb = (16 + 2 * iabs(k - 3)) <<< (N - 6);
          cc = longint'(l + k - 6) <<< (N - 6);
          cons = longint'(x0) * ca + longint'(x1) * cb + (cc <<< N);
          sum += (cons * longint'({1'b0, o[l*7+k]})) >>> (2 * N);
        end
      checks++;
      if (longint'(a) != sum) begin
        failures++;
        if (failures < 10) $display("FAIL it=%0d a=%0d exp=%0d", it, a, sum);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
