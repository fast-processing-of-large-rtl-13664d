// nale_array: the two-dimensional mesh of NALEs.
//
// ROWS x COLS NALEs are laid out in a grid; NALE n sits at row n / COLS,
// column n % COLS, row 0 at the top (north). Between every two adjacent NALEs
// there is one gasp_link in each direction, so each NALE exchanges messages
// with up to four neighbours without any shared bus or global arbiter. A
// message sent north by NALE (r,c) arrives at the south input of (r-1,c), and
// so on. A send towards a side with no neighbour is acknowledged at once and
// dropped. Each NALE also has its own gasp_link to the output logic (result
// links res_*), using the same two-phase protocol: a result is pending while
// res_req[n] != res_ack[n].
//
// The mesh and nearest-neighbour links follow the original system drawing;
// the 4 x 6 default is the size drawn there, not a size the original states.
// All NALEs share one clock here; ce[n] is NALE n's clock enable, which sets
// its own speed (all ones: every NALE at full rate). The external port selects one NALE
// (x_sel) for instruction/data memory writes and data memory reads.
module nale_array
  import gp_pkg::*;
#(
  parameter int unsigned ROWS = 4,
  parameter int unsigned COLS = 6,
  localparam int unsigned N   = ROWS * COLS
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [N-1:0]      ce,
  input  logic              start,
  input  logic [N-1:0]      start_mask,
  output logic [N-1:0]      busy,
  output logic [N-1:0]      stall,
  input  logic [11:0]       x_sel,
  input  logic              x_imem_we,
  input  logic              x_dmem_we,
  input  logic [7:0]        x_addr,
  input  logic [DATA_W-1:0] x_wdata,
  output logic [DATA_W-1:0] x_rdata,
  output logic [N-1:0]      res_req,
  output msg_t              res_msg [N],
  input  logic [N-1:0]      res_ack
);
  logic [NDIR-1:0]   in_req  [N];
  msg_t              in_msg  [N][NDIR];
  logic [NDIR-1:0]   in_ack  [N];
  logic [NDIR:0]     out_req [N];
  msg_t              out_msg [N][NDIR+1];
  logic [NDIR:0]     out_ack [N];
  // link outputs, indexed by sending NALE and direction
  logic              l_req   [N][NDIR];
  msg_t              l_msg   [N][NDIR];
  logic              l_ack   [N][NDIR];
  logic [DATA_W-1:0] rdata   [N];

  function automatic int nbr(input int n, input int d);
    int r, c;
    r = n / int'(COLS);
    c = n % int'(COLS);
    unique case (d)
      0: return (r > 0)                ? n - int'(COLS) : -1;
      1: return (c < int'(COLS) - 1)   ? n + 1          : -1;
      2: return (r < int'(ROWS) - 1)   ? n + int'(COLS) : -1;
      default: return (c > 0)          ? n - 1          : -1;
    endcase
  endfunction

  for (genvar n = 0; n < N; n++) begin : g_nale
    nale u_nale (
      .clk, .rst_n, .ce(ce[n]),
      .start(start && start_mask[n]), .busy(busy[n]), .stall(stall[n]),
      .in_req(in_req[n]), .in_msg(in_msg[n]), .in_ack(in_ack[n]),
      .out_req(out_req[n]), .out_msg(out_msg[n]), .out_ack(out_ack[n]),
      .x_imem_we(x_imem_we && x_sel == 12'(n)), .x_dmem_we(x_dmem_we && x_sel == 12'(n)),
      .x_addr, .x_wdata, .x_rdata(rdata[n])
    );

    for (genvar d = 0; d < NDIR; d++) begin : g_out
      if (nbr(n, d) >= 0) begin : g_link
        gasp_link #(.WIDTH(MSG_W)) u_link (
          .clk, .rst_n,
          .r_in(out_req[n][d]), .a_in(out_ack[n][d]), .d_in(out_msg[n][d]),
          .r_out(l_req[n][d]), .a_out(l_ack[n][d]), .d_out(l_msg[n][d])
        );
        // the receiver sees this link on its opposite side
        assign in_req[nbr(n, d)][(d + 2) % 4] = l_req[n][d];
        assign in_msg[nbr(n, d)][(d + 2) % 4] = l_msg[n][d];
        assign l_ack[n][d]                    = in_ack[nbr(n, d)][(d + 2) % 4];
      end else begin : g_edge
        assign out_ack[n][d]              = out_req[n][d];
        assign l_req[n][d]                = 1'b0;
        assign l_msg[n][d]                = '0;
        assign l_ack[n][d]                = 1'b0;
        assign in_req[n][d]               = 1'b0;
        assign in_msg[n][d]               = '0;
      end
    end

    gasp_link #(.WIDTH(MSG_W)) u_res_link (
      .clk, .rst_n,
      .r_in(out_req[n][NDIR]), .a_in(out_ack[n][NDIR]), .d_in(out_msg[n][NDIR]),
      .r_out(res_req[n]), .a_out(res_ack[n]), .d_out(res_msg[n])
    );
  end

  always_comb begin
    x_rdata = '0;
    for (int n = 0; n < int'(N); n++)
      if (x_sel == 12'(n)) x_rdata = rdata[n];
  end
endmodule
