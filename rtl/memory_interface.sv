// memory_interface: batch access unit between the graph processor and main
// memory.
//
// Read side: rd_start loads a batch (rd_base, rd_len words). The unit issues
// word reads at rd_base, rd_base+1, ... and delivers the returned words, in
// order, on the s_* stream to the dispatch logic. It never has more than
// MAX_OUT words either in flight or waiting in its read buffer, so returning
// data always has room and back-pressure from the stream throttles the reads.
// rd_busy stays high until the last word of the batch has left on the stream.
// Write side: every word offered on the m_* stream (from the output logic) is
// written at the write pointer, which wr_load sets to wr_base and which then
// advances by one per word; wr_count counts words written since wr_load.
// Writes take priority over reads on the memory port.
//
// Main memory port (this design's choice, the original gives none): a request
// (mem_req, mem_we, mem_addr, mem_wdata) is taken in a cycle where mem_gnt is
// high; read data comes back later, in request order, with mem_rvalid.
// The purpose (coordinate batch accesses) is from the original work.
module memory_interface
  import gp_pkg::*;
#(
  parameter int unsigned MAX_OUT = 4
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              rd_start,
  input  logic [31:0]       rd_base,
  input  logic [15:0]       rd_len,
  output logic              rd_busy,
  input  logic              wr_load,
  input  logic [31:0]       wr_base,
  output logic [31:0]       wr_count,
  output logic              mem_req,
  output logic              mem_we,
  output logic [31:0]       mem_addr,
  output logic [DATA_W-1:0] mem_wdata,
  input  logic              mem_gnt,
  input  logic              mem_rvalid,
  input  logic [DATA_W-1:0] mem_rdata,
  output logic              s_valid,
  input  logic              s_ready,
  output logic [DATA_W-1:0] s_data,
  input  logic              m_valid,
  output logic              m_ready,
  input  logic [DATA_W-1:0] m_data
);
  localparam int unsigned CW = $clog2(MAX_OUT + 1);

  logic [31:0]   rd_addr, wr_ptr;
  logic [15:0]   rd_left;
  logic [CW-1:0] inflight, buf_count;
  logic          buf_empty, buf_full, buf_pop;
  logic          can_issue, issue_rd, issue_wr;

  nale_fifo #(.WIDTH(DATA_W), .DEPTH(MAX_OUT)) u_rbuf (
    .clk, .rst_n, .push(mem_rvalid), .din(mem_rdata), .full(buf_full),
    .pop(buf_pop), .dout(s_data), .empty(buf_empty), .count(buf_count)
  );

  assign can_issue = (rd_left != '0) && ((32'(inflight) + 32'(buf_count)) < MAX_OUT);
  assign mem_req   = m_valid || can_issue;
  assign mem_we    = m_valid;
  assign mem_addr  = m_valid ? wr_ptr : rd_addr;
  assign mem_wdata = m_data;
  assign issue_wr  = m_valid && mem_gnt;
  assign issue_rd  = !m_valid && can_issue && mem_gnt;
  assign m_ready   = issue_wr;
  assign s_valid   = !buf_empty;
  assign buf_pop   = s_valid && s_ready;
  assign rd_busy   = (rd_left != '0) || (inflight != '0) || !buf_empty;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_addr  <= '0;
      rd_left  <= '0;
      inflight <= '0;
      wr_ptr   <= '0;
      wr_count <= '0;
    end else begin
      if (rd_start) begin
        rd_addr <= rd_base;
        rd_left <= rd_len;
      end else if (issue_rd) begin
        rd_addr <= rd_addr + 32'd1;
        rd_left <= rd_left - 16'd1;
      end
      inflight <= inflight + CW'(issue_rd) - CW'(mem_rvalid);
      if (wr_load) begin
        wr_ptr   <= wr_base;
        wr_count <= '0;
      end else if (issue_wr) begin
        wr_ptr   <= wr_ptr + 32'd1;
        wr_count <= wr_count + 32'd1;
      end
    end
  end

  a_room: assert property (@(posedge clk) disable iff (!rst_n) mem_rvalid |-> !buf_full);
endmodule
