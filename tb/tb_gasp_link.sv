// tb_gasp_link: self-checking test of gasp_link.
// A two-phase sender and receiver with random delays pass 200 messages
// through the stage; every message must arrive once, in order, unchanged.
// Also checks the stage's timing: r_out and a_in toggle exactly one cycle
// after a new request when the stage is empty, and the stage never takes a
// second message before the receiver has acknowledged the first.
module tb_gasp_link;
  localparam int W = 35;
  logic clk = 0, rst_n = 0;
  logic r_in, a_in, r_out, a_out;
  logic [W-1:0] d_in, d_out;
  int checks = 0, failures = 0;
  logic [W-1:0] sent[$];
  int received = 0;
  localparam int NMSG = 200;

  gasp_link #(.WIDTH(W)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  // sender
  initial begin
    r_in = 0; d_in = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // first message into an empty stage: fixed latency check
    @(negedge clk);
    d_in = 35'h1_2345_6789; r_in = ~r_in; sent.push_back(d_in);
    @(negedge clk);
    check(r_out == 1'b1 && a_in == 1'b1 && d_out == 35'h1_2345_6789, "one-cycle latency into empty stage");
    for (int i = 1; i < NMSG; i++) begin
      while (a_in != r_in) @(negedge clk);
      repeat ($urandom_range(0, 2)) @(negedge clk);
      d_in = {$urandom, $urandom} & {W{1'b1}};
      sent.push_back(d_in);
      r_in = ~r_in;
    end
  end

  // receiver
  initial begin
    a_out = 0;
    @(posedge rst_n);
    while (received < NMSG) begin
      @(negedge clk);
      if (r_out != a_out) begin
        repeat ($urandom_range(0, 3)) begin
          @(negedge clk);
          check(r_out != a_out, "stage holds its message until acknowledged");
        end
        check(sent.size() > 0 && d_out == sent[0], "message value and order");
        void'(sent.pop_front());
        received++;
        a_out = ~a_out;
      end
    end
    check(received == NMSG, "all messages received");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
