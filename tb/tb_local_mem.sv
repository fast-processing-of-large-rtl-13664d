// tb_local_mem: self-checking test of local_mem.
// Random writes through both ports (including same-address collisions, where
// the core port must win) and asynchronous reads on both ports, checked
// against an array reference.
module tb_local_mem;
  localparam int W = 32, D = 256;
  logic clk = 0;
  logic c_we, x_we;
  logic [7:0] c_addr, x_addr;
  logic [W-1:0] c_wdata, c_rdata, x_wdata, x_rdata;
  logic [W-1:0] ref_mem [D];
  int checks = 0, failures = 0;

  local_mem #(.WIDTH(W), .DEPTH(D)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  initial begin
    c_we = 0; x_we = 0; c_addr = 0; x_addr = 0; c_wdata = 0; x_wdata = 0;
    // initialise through the external port
    for (int i = 0; i < D; i++) begin
      @(negedge clk);
      x_we = 1; x_addr = 8'(i); x_wdata = $urandom; ref_mem[i] = x_wdata;
    end
    @(negedge clk); x_we = 0;
    for (int i = 0; i < 3000; i++) begin
      @(negedge clk);
      c_addr = $urandom; x_addr = (i % 4 == 0) ? c_addr : 8'($urandom);
      #1;
      check(c_rdata == ref_mem[c_addr] && x_rdata == ref_mem[x_addr], "read both ports");
      c_we = $urandom_range(0, 1); x_we = $urandom_range(0, 1);
      c_wdata = $urandom; x_wdata = $urandom;
      @(posedge clk);
      if (x_we) ref_mem[x_addr] = x_wdata;
      if (c_we) ref_mem[c_addr] = c_wdata;
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
