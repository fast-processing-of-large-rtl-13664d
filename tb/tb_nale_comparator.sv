// tb_nale_comparator: self-checking test of nale_comparator.
// Random and equal operand pairs; the three one-hot outputs and the 2-bit
// code (LT=01, EQ=10, GT=11) are checked against an unsigned reference.
module tb_nale_comparator;
  import gp_pkg::*;
  logic [31:0] a, b;
  logic lt, eq, gt;
  logic [1:0] code;
  int checks = 0, failures = 0;

  nale_comparator dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s a=%h b=%h", what, a, b); end
  endtask

  initial begin
    for (int i = 0; i < 3000; i++) begin
      a = $urandom; b = (i % 5 == 0) ? a : $urandom;
      if (i % 11 == 0) begin a = 32'h8000_0000; b = 32'h7FFF_FFFF; end
      #1;
      check({lt, eq, gt} == {a < b, a == b, a > b}, "one-hot outputs");
      check(code == ((a < b) ? 2'b01 : (a == b) ? 2'b10 : 2'b11), "code");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
