// main_memory_model: behavioural model of the main memory, for simulation.
// Not synthesizable hardware: it stands for the external memory the graph
// processor reads and writes. Word-addressed, DEPTH words. A request is taken
// when mem_gnt is high; mem_gnt is withheld at random (GNT_PCT percent of
// cycles it is high) to exercise back-pressure. Read data returns in order,
// LATENCY cycles after the request, with mem_rvalid. Testbenches reach the
// array `mem` directly to place load images and read results.
module main_memory_model #(
  parameter int DEPTH   = 4096,
  parameter int LATENCY = 3,
  parameter int GNT_PCT = 70
) (
  input  logic        clk,
  input  logic        mem_req,
  input  logic        mem_we,
  input  logic [31:0] mem_addr,
  input  logic [31:0] mem_wdata,
  output logic        mem_gnt,
  output logic        mem_rvalid,
  output logic [31:0] mem_rdata
);
  logic [31:0] mem [DEPTH];
  logic        v_pipe [LATENCY];
  logic [31:0] d_pipe [LATENCY];

  initial begin
    for (int i = 0; i < DEPTH; i++) mem[i] = '0;
    for (int i = 0; i < LATENCY; i++) begin v_pipe[i] = 0; d_pipe[i] = '0; end
    mem_gnt = 0;
  end

  assign mem_rvalid = v_pipe[LATENCY-1];
  assign mem_rdata  = d_pipe[LATENCY-1];

  always @(negedge clk) mem_gnt <= ($urandom_range(0, 99) < GNT_PCT);

  always @(posedge clk) begin
    for (int i = LATENCY - 1; i > 0; i--) begin
      v_pipe[i] <= v_pipe[i-1];
      d_pipe[i] <= d_pipe[i-1];
    end
    v_pipe[0] <= mem_req && mem_gnt && !mem_we;
    d_pipe[0] <= mem[mem_addr % DEPTH];
    if (mem_req && mem_gnt && mem_we) mem[mem_addr % DEPTH] <= mem_wdata;
  end
endmodule
