// tb_nale_array: self-checking test of nale_array on a 3 x 4 mesh.
// Every NALE runs the shortest-path node program for one node of a grid DAG
// (edges east and south, random weights). The corner NALE also sends north,
// off the edge of the mesh, which must be dropped without blocking. The last
// NALE emulates a 2-node tail in node-cluster mode. The testbench acts as
// the output logic on the result links and checks every record against
// distances computed here by dynamic programming over the grid.
// Each NALE gets its own speed through its clock enable (NALE n is enabled
// in about one cycle in n % 3 + 1), so neighbours run at different rates.
module tb_nale_array;
  import gp_pkg::*;
  import gp_tb_pkg::*;
  localparam int R = 3, C = 4, N = R * C, TAIL = 2;
  logic clk = 0, rst_n = 0;
  logic start;
  logic [N-1:0] ce;
  logic [N-1:0] start_mask, busy, stall, res_req, res_ack;
  msg_t res_msg [N];
  logic [11:0] x_sel;
  logic x_imem_we, x_dmem_we;
  logic [7:0] x_addr;
  logic [31:0] x_wdata, x_rdata;
  int checks = 0, failures = 0;
  msg_t got [N][$];
  int wN [N], wW [N], dref [N];

  nale_array #(.ROWS(R), .COLS(C)) dut (.*);

  always #5 clk = ~clk;
  always @(negedge clk)
    for (int n = 0; n < N; n++) ce[n] = ($urandom_range(0, n % 3) == 0);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  task automatic wr(input int n, input bit imem, input int a, input logic [31:0] v);
    @(negedge clk); x_sel = 12'(n); x_imem_we = imem; x_dmem_we = !imem; x_addr = 8'(a); x_wdata = v;
    @(negedge clk); x_imem_we = 0; x_dmem_we = 0;
  endtask

  always @(negedge clk)
    for (int n = 0; n < N; n++)
      if (rst_n && res_req[n] != res_ack[n] && $urandom_range(0, 3) == 0) begin
        got[n].push_back(res_msg[n]);
        res_ack[n] = ~res_ack[n];
      end

  initial begin
    prog_t p;
    logic [3:0] im, om;
    start = 0; start_mask = '0; res_ack = '0; x_sel = 0; x_imem_we = 0; x_dmem_we = 0; x_addr = 0; x_wdata = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < N; n++) begin
      int r, c;
      r = n / C; c = n % C;
      wN[n] = $urandom_range(1, 50); wW[n] = $urandom_range(1, 50);
      im = {c > 0, 1'b0, 1'b0, r > 0};            // W, S, E, N
      om = {1'b0, r < R - 1, c < C - 1, n == 0};  // W, S, E, N (N off-edge at NALE 0)
      p = build_sssp_node(im, om, n == 0, (n == N - 1) ? TAIL : 0);
      for (int i = 0; i < p.size(); i++) wr(n, 1, i, 32'(p[i]));
      wr(n, 0, 0, wN[n]); wr(n, 0, 3, wW[n]); wr(n, 0, 5, 32'(n + 2)); wr(n, 0, 6, 32'd4);
      // reference distance
      if (n == 0) dref[n] = 0;
      else begin
        dref[n] = INF;
        if (r > 0 && dref[n - C] + wN[n] < dref[n]) dref[n] = dref[n - C] + wN[n];
        if (c > 0 && dref[n - 1] + wW[n] < dref[n]) dref[n] = dref[n - 1] + wW[n];
      end
    end
    @(negedge clk); start = 1; start_mask = '1;
    @(negedge clk); start = 0;
    while (busy != '0) @(negedge clk);
    repeat (100) @(negedge clk);
    for (int n = 0; n < N; n++) begin
      int expn;
      expn = (n == N - 1) ? 2 + TAIL : 2;
      check(got[n].size() == expn, $sformatf("NALE %0d record count %0d", n, got[n].size()));
      if (got[n].size() >= 2) begin
        check(got[n][0].id == 0 && got[n][0].data == 32'(dref[n]), $sformatf("NALE %0d distance", n));
        check(got[n][1].id == 1 && got[n][1].data == 32'(dref[n] * (n + 2)), $sformatf("NALE %0d scaled", n));
      end
      if (n == N - 1 && got[n].size() == 2 + TAIL)
        for (int i = 0; i < TAIL; i++)
          check(got[n][2 + i].id == 2 && got[n][2 + i].data == 32'(dref[n] + 4 * (i + 1)), "tail node distance");
    end
    // data memory readback through the external port
    @(negedge clk); x_sel = 12'(N - 1); x_addr = 8'd8; #1;
    check(x_rdata == 32'(dref[N - 1]), "best distance readable from data memory");
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
