// scheduler: job scheduler of the co-processor.
//
// Takes one graph job at a time from the co-processor's CPU (job_valid /
// job_ready handshake). A job names a load image in main memory (job_base,
// job_len words, in the dispatch stream format: programs, data and start
// commands) and where results go (job_out_base). The scheduler
//   1. clears the monitor and points the memory interface's write pointer at
//      job_out_base,
//   2. has the memory interface stream the load image to the dispatch logic,
//   3. waits until the whole image has been read and the monitor reports the
//      job finished, then pulses job_done for one cycle.
// The original work says the co-processor schedules the graph part of the
// application; this sequence is this design's own. A job with no start
// command in its image never finishes.
module scheduler
  import gp_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        job_valid,
  output logic        job_ready,
  input  logic [31:0] job_base,
  input  logic [15:0] job_len,
  input  logic [31:0] job_out_base,
  output logic        job_done,
  output logic        rd_start,
  output logic [31:0] rd_base,
  output logic [15:0] rd_len,
  input  logic        rd_busy,
  output logic        wr_load,
  output logic [31:0] wr_base,
  output logic        mon_clear,
  input  logic        mon_done
);
  typedef enum logic [1:0] {J_IDLE, J_LOAD, J_RUN, J_DONE} jstate_e;
  jstate_e state;

  assign job_ready = (state == J_IDLE);
  assign rd_start  = (state == J_IDLE) && job_valid;
  assign wr_load   = rd_start;
  assign mon_clear = rd_start;
  assign rd_base   = job_base;
  assign rd_len    = job_len;
  assign wr_base   = job_out_base;
  assign job_done  = (state == J_DONE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) state <= J_IDLE;
    else begin
      unique case (state)
        J_IDLE: if (job_valid) state <= J_LOAD;
        J_LOAD: if (!rd_busy) state <= J_RUN;
        J_RUN:  if (mon_done) state <= J_DONE;
        J_DONE: state <= J_IDLE;
        default: state <= J_IDLE;
      endcase
    end
  end
endmodule
