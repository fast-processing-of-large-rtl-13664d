// gasp_link: one two-phase handshake stage between two NALEs.
//
// This is the clocked counterpart of the GasP link drawn in the original
// work's "synthesizable equivalent": a data latch, and one flip-flop whose
// output is both the request to the receiver (r_out) and the acknowledge to
// the sender (a_in). Signalling is two-phase: a request or an acknowledge is a
// transition, not a level. The stage holds a message ("full") while r_out
// differs from a_out. It fires when the sender has a message pending
// (r_in != a_in) and the stage is empty (r_out == a_out): it captures d_in
// and toggles the flip-flop, which at once acknowledges the sender and
// requests the receiver. The firing rule is this design's reading of the
// drawing; the latch and flip-flop are modelled as registers on clk.
//
// Timing: a message presented at cycle t is on d_out with r_out toggled after
// the clock edge ending cycle t (one cycle of latency); the stage can take a
// new message every second cycle at best, once the receiver has acknowledged.
// The sender must hold d_in steady while r_in != a_in.
module gasp_link #(
  parameter int unsigned WIDTH = 35
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             r_in,
  output logic             a_in,
  input  logic [WIDTH-1:0] d_in,
  output logic             r_out,
  input  logic             a_out,
  output logic [WIDTH-1:0] d_out
);
  logic ff;
  logic enable;

  assign enable = (r_in != ff) && (ff == a_out);
  assign r_out  = ff;
  assign a_in   = ff;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) ff <= 1'b0;
    else if (enable) ff <= ~ff;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) d_out <= '0;
    else if (enable) d_out <= d_in;
  end
endmodule
