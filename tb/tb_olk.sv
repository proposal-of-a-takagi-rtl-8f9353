// tb_olk: self-checking testbench for the rule operation unit O-lk.
// Drives random and corner pairs of [uN.N] degrees and checks that the
// output is their minimum.
module tb_olk;
  localparam int N = 16;
  logic [N-1:0] f0, f1, o;
  int checks = 0, failures = 0;

  olk #(.N(N)) dut (.f0(f0), .f1(f1), .o(o));

  task automatic check(logic [N-1:0] a, logic [N-1:0] b);
    logic [N-1:0] exp;
    f0 = a; f1 = b;
    #1;
    exp = (a < b) ? a : b;
    checks++;
    if (o !== exp) begin
      failures++;
      $display("FAIL f0=%0h f1=%0h o=%0h exp=%0h", a, b, o, exp);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    check('0, '0); check('1, '0); check('0, '1); check('1, '1);
    check(16'h8000, 16'h7fff); check(16'h7fff, 16'h8000);
    for (int i = 0; i < 2000; i++) check(N'($urandom), N'($urandom));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
