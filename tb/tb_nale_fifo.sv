// tb_nale_fifo: self-checking test of nale_fifo.
// Random pushes and pops (including push+pop together, and attempts at full
// or empty that the test holds back) are checked against a queue reference:
// head value, empty, full and count every cycle.
module tb_nale_fifo;
  localparam int W = 35, D = 4;
  logic clk = 0, rst_n = 0;
  logic push, pop, full, empty;
  logic [W-1:0] din, dout;
  logic [$clog2(D+1)-1:0] count;
  int checks = 0, failures = 0;
  logic [W-1:0] q[$];
  int fills = 0;

  nale_fifo #(.WIDTH(W), .DEPTH(D)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    push = 0; pop = 0; din = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 2000; i++) begin
      @(negedge clk);
      check(empty == (q.size() == 0), "empty");
      check(full == (q.size() == D), "full");
      check(count == q.size(), "count");
      if (q.size() > 0) check(dout == q[0], "head");
      if (full) fills++;
      push = ($urandom_range(0, 99) < ((i / 200) % 2 ? 70 : 35)) && !full;
      pop  = ($urandom_range(0, 99) < ((i / 200) % 2 ? 35 : 70)) && !empty;
      din  = {$urandom, $urandom} & {W{1'b1}};
      @(posedge clk);
      #1;
      if (pop)  void'(q.pop_front());
      if (push) q.push_back(din);
    end
    check(fills > 0, "fifo reached full at least once");
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
