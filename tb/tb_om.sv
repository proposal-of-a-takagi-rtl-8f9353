// tb_om: self-checking testbench for the operation module. Random degree
// vectors; every rule output g = l*7 + k must equal min(f0[l], f1[k]).
module tb_om;
  localparam int N = 16, F0 = 7, F1 = 7;
  logic [N-1:0] f0 [F0];
  logic [N-1:0] f1 [F1];
  logic [N-1:0] o  [F0*F1];
  int checks = 0, failures = 0;

  om #(.N(N), .F0(F0), .F1(F1)) dut (.f0(f0), .f1(f1), .o(o));

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int it = 0; it < 300; it++) begin
      foreach (f0[i]) f0[i] = N'($urandom);
      foreach (f1[i]) f1[i] = N'($urandom);
      if (it == 0) begin
        foreach (f0[i]) f0[i] = N'(i * 1000);
        foreach (f1[i]) f1[i] = N'(6500 - i * 1000);
      end
      #1;
      for (int l = 0; l < F0; l++)
        for (int k = 0; k < F1; k++) begin
          logic [N-1:0] exp;
          exp = (f0[l] < f1[k]) ? f0[l] : f1[k];
          checks++;
          if (o[l*F1+k] !== exp) begin
            failures++;
            if (failures < 10) $display("FAIL l=%0d k=%0d o=%0h exp=%0h", l, k, o[l*F1+k], exp);
          end
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
