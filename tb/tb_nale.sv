// tb_nale: self-checking test of one NALE.
// The testbench plays the four neighbours (two-phase senders and receivers)
// and the output logic, and loads programs through the external port.
// Test 1: weighted sum of four received values (MUL + accumulate); with the
//   inputs already waiting, the 19-instruction straight-line program must
//   take exactly 19 busy cycles (one instruction per cycle).
// Test 2: shortest-path node program with inputs from N and W arriving late
//   (RECV stalls), min relaxation, sends to E and S, and a node-cluster tail
//   of 3 nodes through the internal FIFO with a counted branch loop; the
//   output links are acknowledged slowly so SENDs stall. The NALE's clock
//   enable is random here (about two cycles in three), as for a NALE running
//   slower than its neighbours; results must not change.
// Expected values are computed here from the inputs.
module tb_nale;
  import gp_pkg::*;
  import gp_tb_pkg::*;
  logic clk = 0, rst_n = 0;
  logic start, busy, stall;
  logic [NDIR-1:0] in_req, in_ack;
  msg_t in_msg [NDIR];
  logic [NDIR:0] out_req, out_ack;
  msg_t out_msg [NDIR+1];
  logic x_imem_we, x_dmem_we;
  logic [7:0] x_addr;
  logic [31:0] x_wdata, x_rdata;
  int checks = 0, failures = 0;
  int busy_cycles = 0, stall_cycles = 0, send_stalls = 0;
  msg_t got [NDIR+1][$];
  int ack_delay = 0;
  logic ce = 1;
  bit slow = 0;

  nale dut (.*);

  always #5 clk = ~clk;
  always @(negedge clk) if (slow) ce = ($urandom_range(0, 2) != 0);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  task automatic load(input prog_t p);
    for (int i = 0; i < p.size(); i++) begin
      @(negedge clk); x_imem_we = 1; x_addr = 8'(i); x_wdata = 32'(p[i]);
    end
    @(negedge clk); x_imem_we = 0;
  endtask
  task automatic dset(input int a, input logic [31:0] v);
    @(negedge clk); x_dmem_we = 1; x_addr = 8'(a); x_wdata = v;
    @(negedge clk); x_dmem_we = 0;
  endtask
  task automatic send_in(input int port, input logic [2:0] id, input logic [31:0] v);
    while (in_req[port] != in_ack[port]) @(negedge clk);
    in_msg[port] = '{id: id, data: v};
    in_req[port] = ~in_req[port];
  endtask
  task automatic run_and_wait();
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    while (busy) @(negedge clk);
    repeat (300) @(negedge clk);
  endtask

  // receivers on the five outgoing links
  always @(negedge clk) begin
    for (int d = 0; d <= NDIR; d++)
      if (rst_n && out_req[d] != out_ack[d] && ($urandom_range(0, 99) >= ack_delay)) begin
        got[d].push_back(out_msg[d]);
        out_ack[d] = ~out_ack[d];
      end
  end
  always @(posedge clk) if (rst_n) begin
    if (busy) busy_cycles++;
    if (stall) stall_cycles++;
    if (stall && dut.op == OP_SEND) send_stalls++;
  end

  initial begin
    logic [31:0] v[4], w[4], sum, best, b;
    prog_t p;
    start = 0; in_req = '0; out_ack = '0; x_imem_we = 0; x_dmem_we = 0; x_addr = 0; x_wdata = 0;
    for (int k = 0; k < NDIR; k++) in_msg[k] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // ---------------- test 1 ----------------
    p = build_wsum();
    load(p);
    sum = 0;
    for (int k = 0; k < 4; k++) begin
      w[k] = $urandom; v[k] = $urandom; sum += v[k] * w[k];
      dset(k, w[k]);
    end
    for (int k = 0; k < 4; k++) send_in(3 - k, 3'(k), v[k]);   // ID names the register
    repeat (12) @(negedge clk);
    busy_cycles = 0;
    run_and_wait();
    check(busy_cycles == p.size(), $sformatf("one instruction per cycle (%0d busy cycles)", busy_cycles));
    check(got[4].size() == 1 && got[4][0].data == sum && got[4][0].id == 3'd5, "weighted sum result");
    @(negedge clk); x_addr = 8'd20; #1;
    check(x_rdata == sum, "weighted sum stored in data memory");
    got[4].delete();
    // ---------------- test 2 ----------------
    ack_delay = 95;
    slow = 1;
    p = build_sssp_node(4'b1001, 4'b0110, 1'b0, 3);
    load(p);
    w[0] = 32'd7; w[3] = 32'd2;
    dset(0, w[0]); dset(3, w[3]); dset(5, 32'd3); dset(6, 32'd10);
    v[0] = 32'd20; v[3] = 32'd30;
    fork
      run_and_wait();
      begin
        repeat (30) @(negedge clk);
        send_in(0, 3'd0, v[0]);        // from north, to A[0]
        repeat (10) @(negedge clk);
        send_in(3, 3'd3, v[3]);        // from west, to A[3]
      end
    join
    best = (v[0] + w[0] < v[3] + w[3]) ? v[0] + w[0] : v[3] + w[3];
    check(got[1].size() == 1 && got[1][0].data == best && got[1][0].id == 3'd3, "east neighbour gets best");
    check(got[2].size() == 1 && got[2][0].data == best && got[2][0].id == 3'd0, "south neighbour gets best");
    check(got[0].size() == 0 && got[3].size() == 0, "nothing sent north or west");
    check(got[4].size() == 5, $sformatf("five result records (%0d)", got[4].size()));
    if (got[4].size() == 5) begin
      check(got[4][0].id == 0 && got[4][0].data == best, "record: best");
      check(got[4][1].id == 1 && got[4][1].data == best * 3, "record: scaled best");
      b = best;
      for (int i = 2; i < 5; i++) begin
        b += 10;
        check(got[4][i].id == 2 && got[4][i].data == b, "record: cluster tail node");
      end
    end
    check(stall_cycles > 25, "RECV stalled while inputs were missing");
    check(send_stalls > 0, "SEND stalled on a busy link");
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
