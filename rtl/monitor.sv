// monitor: execution monitor of the co-processor.
//
// Watches the NALE array while a job runs and tells the co-processor when it
// has finished. `clear` (at the start of a job) zeroes all counters. The
// first `start` seen afterwards arms the monitor; from then on it counts
//   run_cycles    cycles until completion,
//   stall_cycles  cycles in which at least one NALE was stalled,
//   results       result records accepted by the memory interface,
//   halts         NALEs that went from running to idle.
// Completion (`done`, held until the next clear) is declared once no NALE has
// been busy and the output path has been drained for QUIET consecutive cycles,
// which covers a result still crossing its link. The original work says only
// that the co-processor monitors the execution flow; what is counted and the
// completion rule are this design's choices.
module monitor
  import gp_pkg::*;
#(
  parameter int unsigned N_NALE = 24,
  parameter int unsigned QUIET  = 4
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              clear,
  input  logic              start,
  input  logic [N_NALE-1:0] busy,
  input  logic [N_NALE-1:0] stall,
  input  logic              result_fire,
  input  logic              drained,
  output mon_status_t       status
);
  logic              armed;
  logic [N_NALE-1:0] busy_q;
  logic [3:0]        quiet_cnt;
  logic              quiet_now;
  logic [15:0]       falls;

  assign quiet_now = (busy == '0) && drained && !start;

  always_comb begin
    falls = '0;
    for (int n = 0; n < int'(N_NALE); n++)
      falls = falls + 16'(busy_q[n] && !busy[n]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      status    <= '0;
      armed     <= 1'b0;
      busy_q    <= '0;
      quiet_cnt <= '0;
    end else begin
      busy_q <= busy;
      if (clear) begin
        status    <= '0;
        armed     <= 1'b0;
        quiet_cnt <= '0;
      end else begin
        if (start) armed <= 1'b1;
        if ((armed || start) && !status.done) begin
          status.run_cycles <= status.run_cycles + 32'd1;
          if (stall != '0) status.stall_cycles <= status.stall_cycles + 32'd1;
          if (result_fire) status.results <= status.results + 32'd1;
          status.halts <= status.halts + falls;
          if (armed && quiet_now) begin
            quiet_cnt <= quiet_cnt + 4'd1;
            if (32'(quiet_cnt) + 1 >= QUIET) status.done <= 1'b1;
          end else begin
            quiet_cnt <= '0;
          end
        end
      end
    end
  end
endmodule
