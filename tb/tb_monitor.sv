// tb_monitor: self-checking test of monitor (8 NALEs).
// Drives random busy/stall patterns for a job and counts in the testbench
// what the monitor should report: run cycles, stall cycles, result records,
// halts (busy falling edges), and the completion point (QUIET = 4 quiet
// cycles after the array went idle and the output drained). Two jobs, with a
// clear between them.
module tb_monitor;
  import gp_pkg::*;
  localparam int N = 8;
  logic clk = 0, rst_n = 0;
  logic clear, start, result_fire, drained;
  logic [N-1:0] busy, stall;
  mon_status_t status;
  int checks = 0, failures = 0;
  int e_cycles, e_stalls, e_results, e_halts;

  monitor #(.N_NALE(N), .QUIET(4)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  task automatic job(input int len);
    logic [N-1:0] prev;
    @(negedge clk); clear = 1;
    @(negedge clk); clear = 0;
    check(status == '0, "cleared");
    e_cycles = 0; e_stalls = 0; e_results = 0; e_halts = 0;
    repeat (5) begin @(negedge clk); check(!status.done, "not done before start"); end
    start = 1;
    prev = '0;
    for (int t = 0; t < len; t++) begin
      @(negedge clk);
      e_cycles++;
      start = 0;
      busy = (t < len - 10) ? N'($urandom) | N'(1) : '0;
      stall = busy & N'($urandom);
      result_fire = $urandom_range(0, 1);
      drained = (t >= len - 3);
      // counted at the edge ending this cycle
      if (stall != '0) e_stalls++;
      if (result_fire) e_results++;
      e_halts += $countones(prev & ~busy);
      prev = busy;
      check(!status.done, "not done while running");
    end
    result_fire = 0;
    // quiet (idle and drained) from cycle len-3: the 4th quiet cycle is the
    // first one after the loop; run_cycles counts the start cycle, the len
    // loop cycles and that cycle
    repeat (4) @(negedge clk);
    check(status.done, "done after quiet period");
    check(status.run_cycles == 32'(e_cycles + 2), $sformatf("run cycles %0d vs %0d", status.run_cycles, e_cycles + 2));
    check(status.stall_cycles == 32'(e_stalls), "stall cycles");
    check(status.results == 32'(e_results), "results");
    check(status.halts == 16'(e_halts), "halts");
  endtask

  initial begin
    clear = 0; start = 0; busy = '0; stall = '0; result_fire = 0; drained = 1;
    repeat (3) @(negedge clk);
    rst_n = 1;
    job(60);
    job(100);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
