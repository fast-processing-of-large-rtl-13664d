// output_logic: stream output logic / encoder.
//
// Gathers results from the NALEs. Each NALE has a result link (two-phase:
// a result is pending while res_req[n] != res_ack[n]). When it holds no
// record, the unit takes one pending result, choosing round-robin starting
// after the NALE it served last, and acknowledges it by toggling res_ack[n].
// It then encodes the record as two words on the m_* stream (valid/ready):
//   word 0: {8'hA5, 5'b0, id[2:0], NALE index[15:0]}
//   word 1: the 32-bit result value.
// Purpose (gather output data) is from the original work; round-robin order
// and record format are this design's choices. A record takes at least three
// cycles: capture, tag word, data word. `idle` is high when no result is
// pending or held; `rec_fire` marks the cycle a record's last word is taken.
module output_logic
  import gp_pkg::*;
#(
  parameter int unsigned N_NALE = 24
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [N_NALE-1:0] res_req,
  input  msg_t              res_msg [N_NALE],
  output logic [N_NALE-1:0] res_ack,
  output logic              m_valid,
  input  logic              m_ready,
  output logic [DATA_W-1:0] m_data,
  output logic              idle,
  output logic              rec_fire
);
  localparam int unsigned IW = (N_NALE > 1) ? $clog2(N_NALE) : 1;

  typedef enum logic [1:0] {O_IDLE, O_TAG, O_DATA} ostate_e;
  ostate_e        state;
  logic [N_NALE-1:0] pending, ack_q;
  logic [IW-1:0]  rr, pick, idx_q;
  logic           found;
  msg_t           msg_q;

  assign pending = res_req ^ ack_q;
  assign res_ack = ack_q;

  always_comb begin
    found = 1'b0;
    pick  = '0;
    for (int k = 0; k < int'(N_NALE); k++) begin
      int j;
      j = (int'(rr) + k) % int'(N_NALE);
      if (!found && pending[j]) begin
        found = 1'b1;
        pick  = IW'(j);
      end
    end
  end

  assign m_valid = (state != O_IDLE);
  assign m_data  = (state == O_TAG) ? {RES_TAG, 5'd0, msg_q.id, 16'(idx_q)} : msg_q.data;
  assign idle    = (state == O_IDLE) && (pending == '0);
  assign rec_fire = (state == O_DATA) && m_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= O_IDLE;
      ack_q <= '0;
      rr    <= '0;
      idx_q <= '0;
      msg_q <= '0;
    end else begin
      unique case (state)
        O_IDLE: if (found) begin
          idx_q       <= pick;
          msg_q       <= res_msg[pick];
          ack_q[pick] <= ~ack_q[pick];
          rr          <= (int'(pick) == int'(N_NALE) - 1) ? '0 : pick + 1'b1;
          state       <= O_TAG;
        end
        O_TAG:   if (m_ready) state <= O_DATA;
        O_DATA:  if (m_ready) state <= O_IDLE;
        default: state <= O_IDLE;
      endcase
    end
  end

  a_stable: assert property (@(posedge clk) disable iff (!rst_n)
                             m_valid && !m_ready |=> m_valid && $stable(m_data));
endmodule
