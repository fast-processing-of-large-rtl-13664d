// tb_output_logic: self-checking test of output_logic with 6 result links.
// Random two-phase senders post 40 results each; the stream consumer stalls
// at random. Checks: record format (tag word, data word), each NALE's results
// arrive once and in its own order, several links were pending at once (so
// arbitration happened), round-robin fairness (a pending link is passed over
// by at most N-1 records), idle and rec_fire.
module tb_output_logic;
  import gp_pkg::*;
  localparam int N = 6, PER = 40;
  logic clk = 0, rst_n = 0;
  logic [N-1:0] res_req, res_ack;
  msg_t res_msg [N];
  logic m_valid, m_ready, idle, rec_fire;
  logic [31:0] m_data;
  int checks = 0, failures = 0, contention = 0, recs = 0, fires = 0;
  int next_rx [N];
  int served_since [N];
  bit tag_phase = 1;
  int cur_idx;
  logic [N-1:0] pend_at_pick;
  always @(posedge clk) if (int'(dut.state) == 0 && dut.found) pend_at_pick <= res_req ^ res_ack;

  output_logic #(.N_NALE(N)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  for (genvar n = 0; n < N; n++) begin : g_src
    initial begin
      res_req[n] = 0; res_msg[n] = '0;
      @(posedge rst_n);
      for (int i = 0; i < PER; i++) begin
        @(negedge clk);
        while (res_req[n] != res_ack[n]) @(negedge clk);
        repeat ($urandom_range(0, 3)) @(negedge clk);
        res_msg[n] = '{id: 3'(i % 8), data: 32'(n * 1000 + i)};
        res_req[n] = ~res_req[n];
      end
    end
  end

  always @(posedge clk) if (rst_n) begin
    if ($countones(res_req ^ res_ack) > 1) contention++;
    if (rec_fire) fires++;
    if (m_valid && m_ready) begin
      if (tag_phase) begin
        cur_idx = int'(m_data[15:0]);
        check(m_data[31:24] == 8'hA5 && cur_idx < N, "tag word");
        if (cur_idx < N) check(m_data[18:16] == 3'(next_rx[cur_idx] % 8), "id in tag");
      end else begin
        if (cur_idx < N) begin
          check(m_data == 32'(cur_idx * 1000 + next_rx[cur_idx]), "data word");
          next_rx[cur_idx]++;
          for (int k = 0; k < N; k++)
            if (k != cur_idx && pend_at_pick[k]) begin
              served_since[k]++;
              check(served_since[k] <= N - 1, "round-robin: a pending link waits at most N-1 records");
            end
          served_since[cur_idx] = 0;
        end
        recs++;
      end
      tag_phase = !tag_phase;
    end
  end

  initial begin
    m_ready = 0;
    for (int k = 0; k < N; k++) begin next_rx[k] = 0; served_since[k] = 0; end
    repeat (3) @(negedge clk);
    rst_n = 1;
    while (recs < N * PER) begin
      @(negedge clk);
      m_ready = ($urandom_range(0, 99) < 60);
    end
    repeat (5) @(negedge clk);
    check(idle, "idle when all delivered");
    for (int k = 0; k < N; k++) check(next_rx[k] == PER, "all results of a link");
    check(contention > 0, "several result links pending at once");
    check(fires == N * PER, "rec_fire once per record");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
