// tb_graph_processor: end-to-end test of the whole graph processor at its
// default size (4 x 6 NALEs), with a behavioural main memory.
//
// Workload: single-source shortest paths on a 4 x 6 grid DAG (edges east and
// south, random weights 1..50), one graph node per NALE, source at NALE 0.
// The last NALE also emulates a 4-node tail chain in node-cluster mode. The
// testbench builds the load image in main memory (per NALE: data block with
// the edge weights, instruction block with its program; the first row is
// started as soon as it is loaded, so it computes and writes results while the
// rest loads, and the other NALEs are started at the end), submits one job through the job port and waits for job_done. It then
// decodes the result records written to main memory and checks every node's
// distance, its scaled copy (multiplier) and the tail distances against a
// dynamic-programming reference computed here, and the monitor's counters.
//
// Mechanisms that must each occur at least once (counted, a failure if not):
// RECV stall on an empty FIFO, SEND stall on a busy link, internal-FIFO use,
// comparator min replacement, taken branch, send dropped at the mesh edge,
// several result links pending at once, reads throttled by the outstanding
// limit, a write taking the memory port from a ready read.
module tb_graph_processor;
  import gp_pkg::*;
  import gp_tb_pkg::*;
  localparam int R = 4, C = 6, N = R * C, TAIL = 4, OUT_BASE = 3000;
  logic clk = 0, rst_n = 0;
  logic [N-1:0] nale_ce = '1;    // every NALE at the full clock rate
  logic job_valid, job_ready, job_done;
  logic [31:0] job_base, job_out_base;
  logic [15:0] job_len;
  mon_status_t status;
  logic mem_req, mem_we, mem_gnt, mem_rvalid;
  logic [31:0] mem_addr, mem_wdata, mem_rdata;
  int checks = 0, failures = 0;
  int wN [N], wW [N], dref [N];
  int got_val [N][$];
  int got_id  [N][$];
  int cycles = 0;

  // mechanism counters
  int recv_stall [N], send_stall [N], min_upd [N], br_taken [N];
  int if_pushes = 0, edge_drops = 0, out_contention = 0, rd_throttle = 0, wr_prio = 0;

  graph_processor dut (.*);
  main_memory_model #(.DEPTH(4096), .LATENCY(3), .GNT_PCT(70)) u_mem (.*);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  for (genvar k = 0; k < N; k++) begin : g_probe
    initial begin recv_stall[k] = 0; send_stall[k] = 0; min_upd[k] = 0; br_taken[k] = 0; end
    always @(posedge clk) if (rst_n) begin
      if (dut.u_array.g_nale[k].u_nale.stall && dut.u_array.g_nale[k].u_nale.op == OP_RECV) recv_stall[k]++;
      if (dut.u_array.g_nale[k].u_nale.stall && dut.u_array.g_nale[k].u_nale.op == OP_SEND) send_stall[k]++;
      if (dut.u_array.g_nale[k].u_nale.op == OP_CMP && dut.u_array.g_nale[k].u_nale.acc_en) min_upd[k]++;
      if (dut.u_array.g_nale[k].u_nale.running && dut.u_array.g_nale[k].u_nale.op == OP_BR &&
          dut.u_array.g_nale[k].u_nale.branch_taken) br_taken[k]++;
    end
  end

  always @(posedge clk) if (rst_n) begin
    cycles++;
    if (dut.u_array.g_nale[N-1].u_nale.if_push) if_pushes++;
    if (dut.u_array.g_nale[0].u_nale.running && !dut.u_array.g_nale[0].u_nale.stall &&
        dut.u_array.g_nale[0].u_nale.op == OP_SEND && dut.u_array.g_nale[0].u_nale.f_dest == DIR_N) edge_drops++;
    if ($countones(dut.u_out.pending) > 1) out_contention++;
    if (dut.u_mif.rd_left != 0 && !dut.u_mif.can_issue) rd_throttle++;
    if (mem_req && mem_we && dut.u_mif.can_issue) wr_prio++;
  end

  initial begin
    int a, nrec, sum_rs, sum_ss, sum_mu, sum_br;
    prog_t p;
    logic [3:0] im, om;
    job_valid = 0; job_base = 0; job_len = 0; job_out_base = 0;
    // ---------- build the load image ----------
    a = 0;
    for (int n = 0; n < N; n++) begin
      int r, c;
      r = n / C; c = n % C;
      wN[n] = $urandom_range(1, 50); wW[n] = $urandom_range(1, 50);
      im = {c > 0, 1'b0, 1'b0, r > 0};
      om = {1'b0, r < R - 1, c < C - 1, n == 0};
      p = build_sssp_node(im, om, n == 0, (n == N - 1) ? TAIL : 0);
      u_mem.mem[a++] = {DCMD_DMEM, 12'(n), 8'd0, 8'd7};
      u_mem.mem[a++] = 32'(wN[n]); u_mem.mem[a++] = 0; u_mem.mem[a++] = 0; u_mem.mem[a++] = 32'(wW[n]);
      u_mem.mem[a++] = 0; u_mem.mem[a++] = 32'(n + 2); u_mem.mem[a++] = 32'd9;
      u_mem.mem[a++] = {DCMD_IMEM, 12'(n), 8'd0, 8'(p.size())};
      for (int i = 0; i < p.size(); i++) u_mem.mem[a++] = 32'(p[i]);
      if (n < C) u_mem.mem[a++] = {DCMD_START, 12'(n), 16'd0};
      if (n == 0) dref[n] = 0;
      else begin
        dref[n] = INF;
        if (r > 0 && dref[n - C] + wN[n] < dref[n]) dref[n] = dref[n - C] + wN[n];
        if (c > 0 && dref[n - 1] + wW[n] < dref[n]) dref[n] = dref[n - 1] + wW[n];
      end
    end
    for (int n = C; n < N; n++) u_mem.mem[a++] = {DCMD_START, 12'(n), 16'd0};
    check(a < OUT_BASE, "load image fits below the result area");
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    // ---------- run one job ----------
    check(job_ready, "scheduler ready");
    job_valid = 1; job_base = 0; job_len = 16'(a); job_out_base = OUT_BASE;
    @(negedge clk);
    job_valid = 0;
    while (!job_done) @(negedge clk);
    $display("job done after %0d cycles, run %0d cycles, %0d stall cycles, %0d results",
             cycles, status.run_cycles, status.stall_cycles, status.results);
    // ---------- decode results ----------
    nrec = (N * 2 + TAIL);
    for (int i = 0; i < nrec; i++) begin
      logic [31:0] tag;
      int idx;
      tag = u_mem.mem[OUT_BASE + 2 * i];
      idx = int'(tag[15:0]);
      check(tag[31:24] == RES_TAG && idx < N, "record tag");
      if (idx < N) begin
        got_id[idx].push_back(int'(tag[18:16]));
        got_val[idx].push_back(int'(u_mem.mem[OUT_BASE + 2 * i + 1]));
      end
    end
    check(u_mem.mem[OUT_BASE + 2 * nrec] == 0, "no extra records");
    for (int n = 0; n < N; n++) begin
      int expn;
      expn = (n == N - 1) ? 2 + TAIL : 2;
      check(got_val[n].size() == expn, $sformatf("NALE %0d has %0d records", n, got_val[n].size()));
      if (got_val[n].size() >= 2) begin
        check(got_id[n][0] == 0 && got_val[n][0] == dref[n], $sformatf("NALE %0d distance", n));
        check(got_id[n][1] == 1 && got_val[n][1] == dref[n] * (n + 2), $sformatf("NALE %0d scaled distance", n));
      end
      if (n == N - 1 && got_val[n].size() == 2 + TAIL)
        for (int i = 0; i < TAIL; i++)
          check(got_id[n][2 + i] == 2 && got_val[n][2 + i] == dref[n] + 9 * (i + 1), "tail chain distance");
    end
    check(status.done, "monitor reports done");
    check(status.results == 32'(nrec), "monitor result count");
    check(status.halts == 16'(N), "monitor saw every NALE halt");
    // ---------- mechanisms ----------
    sum_rs = 0; sum_ss = 0; sum_mu = 0; sum_br = 0;
    for (int n = 0; n < N; n++) begin
      sum_rs += recv_stall[n]; sum_ss += send_stall[n]; sum_mu += min_upd[n]; sum_br += br_taken[n];
    end
    $display("mechanisms: recv_stall=%0d send_stall=%0d internal_fifo=%0d min_update=%0d branch_taken=%0d edge_drop=%0d out_contention=%0d read_throttle=%0d write_priority=%0d",
             sum_rs, sum_ss, if_pushes, sum_mu, sum_br, edge_drops, out_contention, rd_throttle, wr_prio);
    check(sum_rs > 0, "RECV stall happened");
    check(sum_ss > 0, "SEND stall happened");
    check(if_pushes > 0, "internal FIFO used");
    check(sum_mu > 0, "comparator min replacement happened");
    check(sum_br > 0, "branch taken");
    check(edge_drops > 0, "send dropped at mesh edge");
    check(out_contention > 0, "output logic arbitrated between pending links");
    check(rd_throttle > 0, "memory reads throttled");
    check(wr_prio > 0, "write took priority over read");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
