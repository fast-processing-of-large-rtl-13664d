// tb_graph_workloads: graph algorithms run as back-to-back jobs on the full
// 4 x 6 graph processor (default parameters) with a behavioural main memory.
//
// Three jobs, each with its own load image and result area, run through the
// job port one after another:
//   BFS   breadth-first levels from NALE 0 on a random sub-DAG of the grid
//         (east/south edges kept with probability 3/4, unit weights, 4095 for
//         unreachable vertices), using the shortest-path node program;
//   CC    connected components by min-label propagation on a random
//         undirected subgraph of the mesh, 24 rounds;
//   PR    one PageRank-style step: every vertex forms base + sum of its
//         neighbours' ranks times per-edge weights, in 32-bit fixed point.
// Every vertex's result is decoded from main memory and compared with a
// reference computed here (level-order DP, union of components, direct sum).
// Every NALE runs at its own rate (clock enable high in about one cycle in
// n % 4 + 1 for NALE n), so results must not depend on relative speeds.
// Depth-first search and minimal enclosing triangles are not run: they need
// a traversal order or a global structure that a per-vertex program with
// nearest-neighbour messages does not express.
module tb_graph_workloads;
  import gp_pkg::*;
  import gp_tb_pkg::*;
  localparam int R = 4, C = 6, N = R * C;
  logic clk = 0, rst_n = 0;
  logic [N-1:0] nale_ce;
  logic job_valid, job_ready, job_done;
  logic [31:0] job_base, job_out_base;
  logic [15:0] job_len;
  mon_status_t status;
  logic mem_req, mem_we, mem_gnt, mem_rvalid;
  logic [31:0] mem_addr, mem_wdata, mem_rdata;
  int checks = 0, failures = 0;
  int a;                       // load image write pointer

  graph_processor dut (.*);
  main_memory_model #(.DEPTH(8192), .LATENCY(3), .GNT_PCT(80)) u_mem (.*);

  always #5 clk = ~clk;
  always @(negedge clk)
    for (int n = 0; n < N; n++) nale_ce[n] = ($urandom_range(0, n % 4) == 0);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  function automatic int nb(input int n, input int d);
    int r, c;
    r = n / C; c = n % C;
    case (d)
      0: return (r > 0) ? n - C : -1;
      1: return (c < C - 1) ? n + 1 : -1;
      2: return (r < R - 1) ? n + C : -1;
      default: return (c > 0) ? n - 1 : -1;
    endcase
  endfunction

  task automatic put_node(input int n, input prog_t p, input logic [31:0] d[11]);
    u_mem.mem[a++] = {DCMD_DMEM, 12'(n), 8'd0, 8'd11};
    for (int i = 0; i < 11; i++) u_mem.mem[a++] = d[i];
    u_mem.mem[a++] = {DCMD_IMEM, 12'(n), 8'd0, 8'(p.size())};
    for (int i = 0; i < p.size(); i++) u_mem.mem[a++] = 32'(p[i]);
  endtask

  // run a job and return, per NALE, the value of its last record; every
  // record must carry this id (any id when id < 0)
  task automatic run_job(input int base, input int out_base, input int nrec, input int id,
                         output logic [31:0] val[N], output int cnt[N]);
    int cyc;
    for (int n = 0; n < N; n++) cnt[n] = 0;
    @(negedge clk);
    check(job_ready, "scheduler ready for the next job");
    job_valid = 1; job_base = base; job_len = 16'(a - base); job_out_base = out_base;
    @(negedge clk);
    job_valid = 0;
    cyc = 0;
    while (!job_done) begin @(negedge clk); cyc++; end
    $display("job at %0d: %0d cycles, %0d stall cycles, %0d results", base, cyc, status.stall_cycles, status.results);
    check(status.results == 32'(nrec), "record count");
    for (int i = 0; i < nrec; i++) begin
      logic [31:0] tag;
      tag = u_mem.mem[out_base + 2 * i];
      check(tag[31:24] == RES_TAG && tag[15:0] < N && (id < 0 || int'(tag[18:16]) == id), "record tag");
      if (tag[15:0] < N) begin
        val[tag[15:0]] = u_mem.mem[out_base + 2 * i + 1];
        cnt[tag[15:0]]++;
      end
    end
  endtask

  initial begin
    logic [31:0] d[11];
    logic [31:0] val[N];
    int cnt[N];
    bit   e_east [N], e_south [N];
    int   lvl [N], lab [N], rank [N];
    logic [31:0] w [N][4], pr_ref [N];
    logic [3:0] im, om, m;
    prog_t p;
    int base;
    job_valid = 0; job_base = 0; job_len = 0; job_out_base = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;

    // ---------------- BFS ----------------
    for (int n = 0; n < N; n++) begin
      e_east[n]  = (nb(n, 1) >= 0) && ($urandom_range(0, 3) != 0);
      e_south[n] = (nb(n, 2) >= 0) && ($urandom_range(0, 3) != 0);
    end
    a = 0; base = 0;
    for (int n = 0; n < N; n++) begin
      im = {nb(n, 3) >= 0 && e_east[n - 1], 1'b0, 1'b0, nb(n, 0) >= 0 && e_south[n - C]};
      om = {1'b0, e_south[n], e_east[n], 1'b0};
      p = build_sssp_node(im, om, n == 0, 0);
      for (int i = 0; i < 11; i++) d[i] = 0;
      d[0] = 1; d[3] = 1; d[5] = 1;
      put_node(n, p, d);
      lvl[n] = (n == 0) ? 0 : INF;
      if (im[0] && lvl[n - C] + 1 < lvl[n]) lvl[n] = lvl[n - C] + 1;
      if (im[3] && lvl[n - 1] + 1 < lvl[n]) lvl[n] = lvl[n - 1] + 1;
    end
    u_mem.mem[a++] = {DCMD_START, NALE_ALL, 16'd0};
    run_job(base, 6000, 2 * N, -1, val, cnt);
    // two records per NALE, ID 0 and 1; the last seen is ID 1 (level * 1)
    for (int n = 0; n < N; n++)
      check(cnt[n] == 2 && val[n] == 32'(lvl[n]), $sformatf("BFS level of vertex %0d: %0d vs %0d", n, val[n], lvl[n]));

    // ---------------- CC ----------------
    base = a;
    for (int n = 0; n < N; n++) begin
      e_east[n]  = (nb(n, 1) >= 0) && ($urandom_range(0, 2) == 0);
      e_south[n] = (nb(n, 2) >= 0) && ($urandom_range(0, 2) == 0);
    end
    for (int n = 0; n < N; n++) lab[n] = 100 + ((n * 7) % N);
    for (int it = 0; it < N; it++)
      for (int n = 0; n < N; n++) begin
        if (e_east[n])  begin int t; t = (lab[n] < lab[n + 1]) ? lab[n] : lab[n + 1]; lab[n] = t; lab[n + 1] = t; end
        if (e_south[n]) begin int t; t = (lab[n] < lab[n + C]) ? lab[n] : lab[n + C]; lab[n] = t; lab[n + C] = t; end
      end
    for (int n = 0; n < N; n++) begin
      m = {nb(n, 3) >= 0 && e_east[n - 1], e_south[n], e_east[n], nb(n, 0) >= 0 && e_south[n - C]};
      p = build_cc_node(m, N);
      for (int i = 0; i < 11; i++) d[i] = 0;
      d[8] = 32'(100 + ((n * 7) % N));
      put_node(n, p, d);
    end
    u_mem.mem[a++] = {DCMD_START, NALE_ALL, 16'd0};
    run_job(base, 6200, N, 0, val, cnt);
    for (int n = 0; n < N; n++)
      check(cnt[n] == 1 && val[n] == 32'(lab[n]), $sformatf("CC label of vertex %0d: %0d vs %0d", n, val[n], lab[n]));

    // ---------------- PageRank step ----------------
    base = a;
    for (int n = 0; n < N; n++) rank[n] = $urandom_range(1000, 60000);
    for (int n = 0; n < N; n++) begin
      m = '0;
      for (int k = 0; k < 4; k++) m[k] = (nb(n, k) >= 0);
      for (int i = 0; i < 11; i++) d[i] = 0;
      pr_ref[n] = 32'd150;
      for (int k = 0; k < 4; k++) begin
        w[n][k] = $urandom_range(1, 65535);
        d[k] = w[n][k];
        if (m[k]) pr_ref[n] += 32'(rank[nb(n, k)]) * w[n][k];
      end
      d[8] = 32'(rank[n]); d[9] = 32'd150;
      p = build_pr_node(m);
      put_node(n, p, d);
    end
    u_mem.mem[a++] = {DCMD_START, NALE_ALL, 16'd0};
    check(a < 6000, "load images fit below the result areas");
    run_job(base, 6400, N, 4, val, cnt);
    for (int n = 0; n < N; n++)
      check(cnt[n] == 1 && val[n] == pr_ref[n], $sformatf("PageRank value of vertex %0d", n));

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
