// dispatch_logic: stream dispatch logic / decoder.
//
// Scatters a stream of 32-bit words read from main memory to the NALEs. The
// stream is a sequence of commands, each a header word
//   [31:28] cmd   [27:16] NALE index   [15:8] start address   [7:0] count
// followed, for the two load commands, by `count` payload words:
//   cmd 1  write `count` instructions (payload bits [15:0]) into the NALE's
//          instruction memory from the start address upwards;
//   cmd 2  write `count` words into the NALE's data memory likewise;
//   cmd 3  start the NALE (index 0xFFF: every NALE); no payload.
// Other commands, and indices beyond the array, are consumed and ignored.
// The original work gives the unit's purpose (scatter from main memory) but
// not its stream format, which is this design's own.
//
// Timing: every word is accepted in the cycle it is offered (s_ready is
// always high); a payload word appears on the x_* write port in that same
// cycle, combinationally, and a start command drives start/start_mask in that
// same cycle.
module dispatch_logic
  import gp_pkg::*;
#(
  parameter int unsigned N_NALE = 24
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              s_valid,
  output logic              s_ready,
  input  logic [DATA_W-1:0] s_data,
  output logic [11:0]       x_sel,
  output logic              x_imem_we,
  output logic              x_dmem_we,
  output logic [7:0]        x_addr,
  output logic [DATA_W-1:0] x_wdata,
  output logic              start,
  output logic [N_NALE-1:0] start_mask
);
  typedef enum logic {D_HDR, D_DATA} dstate_e;
  dstate_e    state;
  logic [3:0] cmd_q;
  logic [11:0] sel_q;
  logic [7:0] addr_q, left_q;

  logic [3:0]  h_cmd;
  logic [11:0] h_sel;
  assign h_cmd = s_data[31:28];
  assign h_sel = s_data[27:16];

  assign s_ready = 1'b1;
  assign x_sel   = sel_q;
  assign x_addr  = addr_q;
  assign x_wdata = s_data;

  always_comb begin
    x_imem_we  = 1'b0;
    x_dmem_we  = 1'b0;
    start      = 1'b0;
    start_mask = '0;
    if (s_valid && state == D_DATA && sel_q < 12'(N_NALE)) begin
      x_imem_we = (cmd_q == DCMD_IMEM);
      x_dmem_we = (cmd_q == DCMD_DMEM);
    end
    if (s_valid && state == D_HDR && h_cmd == DCMD_START) begin
      if (h_sel == NALE_ALL) begin
        start      = 1'b1;
        start_mask = '1;
      end else if (h_sel < 12'(N_NALE)) begin
        start = 1'b1;
        for (int n = 0; n < int'(N_NALE); n++) start_mask[n] = (h_sel == 12'(n));
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state  <= D_HDR;
      cmd_q  <= '0;
      sel_q  <= '0;
      addr_q <= '0;
      left_q <= '0;
    end else if (s_valid) begin
      if (state == D_HDR) begin
        cmd_q  <= h_cmd;
        sel_q  <= h_sel;
        addr_q <= s_data[15:8];
        left_q <= s_data[7:0];
        if ((h_cmd == DCMD_IMEM || h_cmd == DCMD_DMEM) && s_data[7:0] != 8'd0) state <= D_DATA;
      end else begin
        addr_q <= addr_q + 8'd1;
        left_q <= left_q - 8'd1;
        if (left_q == 8'd1) state <= D_HDR;
      end
    end
  end
endmodule
