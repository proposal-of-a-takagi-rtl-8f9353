// tb_ofm: self-checking testbench for the output function module (N=16).
// Random x0, x1 and sparse random rule strengths. The reference forms the
// numerator exactly in 64-bit integers (floor per rule), the denominator
// exactly, divides in double precision and truncates toward zero to
// [sV.N] with saturation; the module may differ by one LSB because of the
// float32 truncations. All-zero strengths must raise div_by_zero.
module tb_ofm;
  localparam int N = 16;

  logic signed [N:0]   x0, x1, vd;
  logic        [N-1:0] o [49];
  logic vd_sat, dbz;
  int checks = 0, failures = 0, nsat = 0;

  ofm dut (.x0(x0), .x1(x1), .o(o), .vd(vd), .vd_sat(vd_sat), .div_by_zero(dbz));

  function automatic longint iabs(longint v); return (v < 0) ? -v : v; endfunction

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int it = 0; it < 3000; it++) begin
      longint a, b, e, d;
      real q;
      x0 = (N+1)'($urandom);
      x1 = (N+1)'($urandom);
      foreach (o[g]) o[g] = ($urandom_range(0, 4) == 0) ? N'($urandom) : '0;
      o[$urandom_range(0, 48)] = N'($urandom_range(1, 65535));
      // a few cases where b is tiny and |a/b| can exceed 1
      if (it % 50 == 0) begin
        foreach (o[g]) o[g] = '0;
        o[48] = 16'd3;
        o[0]  = 16'd1;
        x0 = 17'h0ffff; x1 = 17'h0ffff;
      end
      #1;
      a = 0; b = 0;
      for (int l = 0; l < 7; l++)
        for (int k = 0; k < 7; k++) begin
          longint cons;
          cons = longint'(x0) * ((32 - 4 * iabs(l - 3)) <<< (N - 6))
               + longint'(x1) * ((16 + 2 * iabs(k - 3)) <<< (N - 6))
               + ((longint'(l + k - 6) <<< (N - 6)) <<< N);
          a += (cons * longint'({1'b0, o[l*7+k]})) >>> (2 * N);
          b += longint'(o[l*7+k]);
        end
      q = real'(a) / real'(b) * (2.0 ** N);
      if (q >= 2.0 ** N)         e = (longint'(1) << N) - 1;
      else if (q < -(2.0 ** N))  e = -(longint'(1) << N);
      else                       e = longint'($rtoi(q));
      d = longint'(vd) - e;
      checks++;
      if (d > 1 || d < -1 || dbz) begin
        failures++;
        if (failures < 10) $display("FAIL it=%0d vd=%0d exp=%0d", it, vd, e);
      end
      if (vd_sat) nsat++;
    end
    foreach (o[g]) o[g] = '0;
    #1;
    checks++;
    if (!dbz || vd !== '0) begin failures++; $display("FAIL zero strengths"); end
    $display("ofm: %0d saturated samples", nsat);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
