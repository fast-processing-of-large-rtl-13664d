// graph_processor: top level of the graph processing system.
//
// Wires the graph processor (memory interface, dispatch logic, NALE array,
// output logic) to the two co-processor units built here (scheduler and
// monitor). Data flow for one job:
//   CPU job -> scheduler -> memory interface reads the load image from main
//   memory -> dispatch logic writes programs/data into the NALEs and starts
//   them -> NALEs compute, exchanging values over the mesh links -> results
//   go over the result links to the output logic -> memory interface writes
//   two words per result to main memory -> monitor sees the array quiet ->
//   scheduler pulses job_done.
// A load image may start NALEs as soon as they are loaded, so computing and
// loading overlap; the monitor therefore counts the output path as drained
// only once the load stream has also ended.
// The co-processor's CPU and the main memory are outside this module: the CPU
// drives the job_* port and reads `status`; main memory answers the mem_*
// port (protocol described in memory_interface). The block structure follows
// the original system drawing; sizes default to the 4 x 6 array drawn there.
// nale_ce gives each NALE its own rate (clock enable); tie it to all ones to
// run every NALE at the full clock rate.
module graph_processor
  import gp_pkg::*;
#(
  parameter int unsigned ROWS = 4,
  parameter int unsigned COLS = 6
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [ROWS*COLS-1:0] nale_ce,
  input  logic              job_valid,
  output logic              job_ready,
  input  logic [31:0]       job_base,
  input  logic [15:0]       job_len,
  input  logic [31:0]       job_out_base,
  output logic              job_done,
  output mon_status_t       status,
  output logic              mem_req,
  output logic              mem_we,
  output logic [31:0]       mem_addr,
  output logic [DATA_W-1:0] mem_wdata,
  input  logic              mem_gnt,
  input  logic              mem_rvalid,
  input  logic [DATA_W-1:0] mem_rdata
);
  localparam int unsigned N = ROWS * COLS;

  logic              rd_start, rd_busy, wr_load, mon_clear;
  logic [31:0]       rd_base, wr_base, wr_count;
  logic [15:0]       rd_len;
  logic              s_valid, s_ready, m_valid, m_ready;
  logic [DATA_W-1:0] s_data, m_data, x_wdata, x_rdata;
  logic [11:0]       x_sel;
  logic              x_imem_we, x_dmem_we, start, out_idle, rec_fire;
  logic [7:0]        x_addr;
  logic [N-1:0]      start_mask, busy, stall, res_req, res_ack;
  msg_t              res_msg [N];

  scheduler u_sched (
    .clk, .rst_n, .job_valid, .job_ready, .job_base, .job_len, .job_out_base, .job_done,
    .rd_start, .rd_base, .rd_len, .rd_busy, .wr_load, .wr_base, .mon_clear, .mon_done(status.done)
  );

  memory_interface u_mif (
    .clk, .rst_n, .rd_start, .rd_base, .rd_len, .rd_busy, .wr_load, .wr_base, .wr_count,
    .mem_req, .mem_we, .mem_addr, .mem_wdata, .mem_gnt, .mem_rvalid, .mem_rdata,
    .s_valid, .s_ready, .s_data, .m_valid, .m_ready, .m_data
  );

  dispatch_logic #(.N_NALE(N)) u_disp (
    .clk, .rst_n, .s_valid, .s_ready, .s_data, .x_sel, .x_imem_we, .x_dmem_we, .x_addr, .x_wdata,
    .start, .start_mask
  );

  nale_array #(.ROWS(ROWS), .COLS(COLS)) u_array (
    .clk, .rst_n, .ce(nale_ce), .start, .start_mask, .busy, .stall, .x_sel, .x_imem_we, .x_dmem_we, .x_addr,
    .x_wdata, .x_rdata, .res_req, .res_msg, .res_ack
  );

  output_logic #(.N_NALE(N)) u_out (
    .clk, .rst_n, .res_req, .res_msg, .res_ack, .m_valid, .m_ready, .m_data, .idle(out_idle),
    .rec_fire
  );

  monitor #(.N_NALE(N)) u_mon (
    .clk, .rst_n, .clear(mon_clear), .start, .busy, .stall,
    .result_fire(rec_fire),
    .drained(out_idle && !m_valid && !rd_busy), .status
  );
endmodule
