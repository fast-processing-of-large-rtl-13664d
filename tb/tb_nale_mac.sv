// tb_nale_mac: self-checking test of nale_mac.
// Random multiply and accumulate operations on all operand selects, checked
// against a reference model computed in the testbench with 64-bit arithmetic.
module tb_nale_mac;
  import gp_pkg::*;
  logic clk = 0, rst_n = 0;
  logic mul_en, acc_en, acc_keep;
  logic [31:0] a, b, imm, mem, x, acc, hi, lo;
  opsel_e sel;
  int checks = 0, failures = 0;
  logic [31:0] m_acc, m_hi, m_lo, m_x;
  logic [63:0] p;

  nale_mac dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  initial begin
    mul_en = 0; acc_en = 0; acc_keep = 0; a = 0; b = 0; imm = 0; mem = 0; sel = SEL_LO;
    m_acc = 0; m_hi = 0; m_lo = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 3000; i++) begin
      @(negedge clk);
      check(acc == m_acc && hi == m_hi && lo == m_lo, "registers");
      a = $urandom; b = $urandom; imm = $urandom; mem = $urandom;
      if (i % 7 == 0) begin a = 32'hFFFF_FFFF; b = 32'hFFFF_FFFF; end
      sel = opsel_e'($urandom_range(0, 5));
      mul_en = $urandom_range(0, 1); acc_en = $urandom_range(0, 1); acc_keep = $urandom_range(0, 1);
      unique case (sel)
        SEL_LO: m_x = m_lo;  SEL_HI: m_x = m_hi;  SEL_A: m_x = a;
        SEL_B:  m_x = b;     SEL_IMM: m_x = imm;  default: m_x = mem;
      endcase
      #1 check(x == m_x, "operand select");
      p = 64'(a) * 64'(b);
      @(posedge clk);
      if (acc_en) m_acc = (acc_keep ? m_acc : 32'd0) + m_x;
      if (mul_en) begin m_hi = p[63:32]; m_lo = p[31:0]; end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
