// tb_memory_interface: self-checking test of memory_interface with the
// behavioural main memory (random grant, 3-cycle read latency).
// A 300-word batch is read while the stream consumer stalls at random, and
// 100 words are written through the write stream at the same time. Checks:
// read words arrive once and in order, writes land at consecutive addresses
// from the loaded base, wr_count, rd_busy falling only when done, and that
// the outstanding-read limit was reached (reads throttled by the buffer).
module tb_memory_interface;
  localparam int NRD = 300, NWR = 100, RBASE = 100, WBASE = 2000;
  logic clk = 0, rst_n = 0;
  logic rd_start, rd_busy, wr_load;
  logic [31:0] rd_base, wr_base, wr_count;
  logic [15:0] rd_len;
  logic mem_req, mem_we, mem_gnt, mem_rvalid;
  logic [31:0] mem_addr, mem_wdata, mem_rdata;
  logic s_valid, s_ready, m_valid, m_ready;
  logic [31:0] s_data, m_data;
  int checks = 0, failures = 0, nrx = 0, nwr = 0, throttled = 0, wr_over_rd = 0;

  memory_interface dut (.*);
  main_memory_model #(.DEPTH(4096)) u_mem (.*);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  always @(posedge clk) if (rst_n) begin
    if (dut.rd_left != 0 && !dut.can_issue) throttled++;
    if (mem_req && mem_we && dut.can_issue) wr_over_rd++;
    if (s_valid && s_ready) begin
      check(s_data == 32'hC000_0000 + 32'(nrx), "read word order and value");
      nrx++;
    end
    if (m_valid && m_ready) nwr++;
  end

  initial begin
    rd_start = 0; rd_base = 0; rd_len = 0; wr_load = 0; wr_base = 0; s_ready = 0; m_valid = 0; m_data = 0;
    for (int i = 0; i < NRD; i++) u_mem.mem[RBASE + i] = 32'hC000_0000 + 32'(i);
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    rd_start = 1; rd_base = RBASE; rd_len = NRD; wr_load = 1; wr_base = WBASE;
    @(negedge clk);
    rd_start = 0; wr_load = 0;
    check(rd_busy, "busy after start");
    fork
      while (nrx < NRD) begin
        s_ready = ($urandom_range(0, 99) < 40);
        @(negedge clk);
      end
      for (int i = 0; i < NWR; i++) begin
        repeat ($urandom_range(0, 4)) @(negedge clk);
        m_valid = 1; m_data = 32'hD000_0000 + 32'(i);
        @(posedge clk);
        while (!m_ready) @(posedge clk);
        @(negedge clk);
        m_valid = 0;
      end
    join
    s_ready = 0;
    repeat (2) @(negedge clk);
    check(!rd_busy, "not busy when batch delivered");
    check(nrx == NRD, "all words read");
    check(wr_count == NWR, "write count");
    for (int i = 0; i < NWR; i++) check(u_mem.mem[WBASE + i] == 32'hD000_0000 + 32'(i), "written word");
    check(throttled > 0, "reads throttled by the outstanding limit");
    check(wr_over_rd > 0, "write took priority over a ready read");
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
