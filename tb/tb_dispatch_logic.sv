// tb_dispatch_logic: self-checking test of dispatch_logic.
// A random command stream (instruction blocks, data blocks, starts of one
// NALE or of all, a command for a NALE beyond the array, an unknown command,
// idle gaps) is fed in; every write and start the block produces is compared
// with a list of expected events built while generating the stream.
module tb_dispatch_logic;
  localparam int N = 24;
  logic clk = 0, rst_n = 0;
  logic s_valid, s_ready;
  logic [31:0] s_data;
  logic [11:0] x_sel;
  logic x_imem_we, x_dmem_we, start;
  logic [7:0] x_addr;
  logic [31:0] x_wdata;
  logic [N-1:0] start_mask;
  int checks = 0, failures = 0;
  typedef struct { int kind; int sel; int addr; logic [31:0] data; logic [N-1:0] mask; } ev_t;
  ev_t expq[$];
  logic [31:0] words[$];

  dispatch_logic #(.N_NALE(N)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  always @(posedge clk) if (rst_n) begin
    if (x_imem_we || x_dmem_we || start) begin
      ev_t e;
      check(expq.size() > 0, "unexpected event");
      if (expq.size() > 0) begin
        e = expq.pop_front();
        if (e.kind == 3) check(start && !x_imem_we && !x_dmem_we && start_mask == e.mask, "start event");
        else check(!start && x_imem_we == (e.kind == 1) && x_dmem_we == (e.kind == 2) &&
                   x_sel == 12'(e.sel) && x_addr == 8'(e.addr) && x_wdata == e.data, "write event");
      end
    end
  end

  initial begin
    s_valid = 0; s_data = 0;
    for (int c = 0; c < 60; c++) begin
      int cmd, sel, addr, cnt;
      cmd = $urandom_range(1, 4); sel = $urandom_range(0, N - 1); addr = $urandom_range(0, 255);
      cnt = $urandom_range(0, 6);
      if (c == 10) sel = N + 3;                  // beyond the array: ignored
      if (cmd == 3 && $urandom_range(0, 2) == 0) sel = 12'hFFF;
      if (cmd == 4) cnt = 0;                     // unknown command, header only
      if (cmd == 3) cnt = 0;
      words.push_back({4'(cmd), 12'(sel), 8'(addr), 8'(cnt)});
      if (cmd == 3) begin
        ev_t e; e.kind = 3; e.mask = '0;
        if (sel == 12'hFFF) e.mask = '1; else e.mask[sel] = 1'b1;
        if (sel == 12'hFFF || sel < N) expq.push_back(e);
      end
      for (int i = 0; i < cnt; i++) begin
        logic [31:0] d;
        d = $urandom;
        words.push_back(d);
        if (sel < N) begin
          ev_t e; e.kind = cmd; e.sel = sel; e.addr = (addr + i) % 256; e.data = d; e.mask = '0;
          expq.push_back(e);
        end
      end
    end
    repeat (3) @(negedge clk);
    rst_n = 1;
    while (words.size() > 0) begin
      @(negedge clk);
      s_valid = ($urandom_range(0, 3) != 0);
      if (s_valid) begin s_data = words.pop_front(); check(s_ready, "always ready"); end
    end
    @(negedge clk); s_valid = 0;
    repeat (3) @(negedge clk);
    check(expq.size() == 0, "all expected events seen");
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
