// tb_scheduler: self-checking test of scheduler.
// The testbench plays the memory interface (rd_busy for a random number of
// cycles after rd_start) and the monitor (mon_done some cycles later). Five
// jobs are run; checks: the job descriptor reaches the memory interface with
// one rd_start/wr_load/mon_clear pulse, job_ready is low while a job runs,
// job_done pulses exactly once per job and not before both the load and the
// run have ended.
module tb_scheduler;
  logic clk = 0, rst_n = 0;
  logic job_valid, job_ready, job_done, rd_start, rd_busy, wr_load, mon_clear, mon_done;
  logic [31:0] job_base, job_out_base, rd_base, wr_base;
  logic [15:0] job_len, rd_len;
  int checks = 0, failures = 0, dones = 0, starts = 0;
  bit load_over, run_over;

  scheduler dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  always @(posedge clk) if (rst_n) begin
    if (rd_start) begin
      starts++;
      check(wr_load && mon_clear, "write pointer and monitor set with the read");
      check(rd_base == job_base && rd_len == job_len && wr_base == job_out_base, "descriptor passed on");
    end
    if (job_done) begin
      dones++;
      check(load_over && run_over, "done only after load and run");
    end
  end

  initial begin
    job_valid = 0; job_base = 0; job_len = 0; job_out_base = 0; rd_busy = 0; mon_done = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int j = 0; j < 5; j++) begin
      int busy_for, run_for;
      busy_for = $urandom_range(1, 20); run_for = $urandom_range(1, 30);
      load_over = 0; run_over = 0;
      @(negedge clk);
      check(job_ready, "ready when idle");
      job_valid = 1; job_base = $urandom; job_len = 16'($urandom); job_out_base = $urandom;
      @(negedge clk);
      job_valid = 0;
      rd_busy = 1;
      repeat (busy_for) begin @(negedge clk); check(!job_ready && !job_done, "busy while loading"); end
      rd_busy = 0; load_over = 1;
      repeat (run_for) begin @(negedge clk); check(!job_done, "no done before monitor"); end
      run_over = 1; mon_done = 1;
      repeat (4) @(negedge clk);
      mon_done = 0;
      check(dones == j + 1, "one done per job");
    end
    check(starts == 5, "one start per job");
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
