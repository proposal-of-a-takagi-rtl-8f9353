// tb_dm: self-checking testbench for the denominator module (N=16, 49
// rules): b must equal the exact sum of the rule strengths.
module tb_dm;
  localparam int N = 16;

  logic [N-1:0] o [49];
  logic [N+6:0] b;
  int checks = 0, failures = 0;

  dm dut (.o(o), .b(b));

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int it = 0; it < 3000; it++) begin
      longint sum;
      foreach (o[g]) o[g] = N'($urandom);
      if (it == 0) foreach (o[g]) o[g] = '1;
      if (it == 1) foreach (o[g]) o[g] = '0;
      #1;
      sum = 0;
      foreach (o[g]) sum += longint'(o[g]);
      checks++;
      if (longint'(b) != sum) begin
        failures++;
        if (failures < 10) $display("FAIL it=%0d b=%0d exp=%0d", it, b, sum);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
