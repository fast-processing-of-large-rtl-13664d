// nale: Node Arithmetic Logic Engine, the processing element of the array.
//
// A NALE runs a small program from its local instruction memory, one 16-bit
// instruction per cycle, and works only on what it holds or receives: it
// waits ("stalls") when a value it needs has not yet arrived or when the link
// it wants to send on is still busy, and otherwise runs on regardless of the
// other NALEs. Following the original micro-architecture it has
//   * a neighbour FIFO, fed from the four incoming links (N, E, S, W) through
//     a round-robin merge, and an internal FIFO through which the NALE sends
//     to itself when it emulates several graph nodes (node-cluster mode);
//   * two banks of neighbour registers (A and B) that hold received values;
//   * a MAC unit (32x32 multiplier, Hi/Lo registers, accumulator);
//   * a three-state comparator whose encoded result steers branches and the
//     "keep the minimum" operation used for shortest-path style relaxation;
//   * local data and instruction memories, loadable from outside.
// The instruction set (see gp_pkg), the register count, FIFO depths and the
// round-robin merge are this design's choices; the original names the units
// and the bus widths but not the ISA.
//
// Links use two-phase signalling (see gasp_link). Incoming link i has a
// message when in_req[i] != in_ack[i]; the NALE toggles in_ack[i] (the 4-bit
// ACK of the output bus) when it has moved the message into the neighbour
// FIFO. Outgoing link d (0..3 = N,E,S,W, 4 = output logic) is free when
// out_req[d] == out_ack[d]; SEND writes out_msg[d] and toggles out_req[d]
// (the Valid of the output bus). A SEND with destination 6 or 7 does nothing.
//
// Local speed: the NALE advances (executes, merges an incoming message) only
// in cycles where `ce` is high. Driving ce with a duty cycle below one models
// a NALE whose own clock is slower than its neighbours'; the link handshakes
// keep every exchange correct whatever the relative speeds. A `start` pulse
// is taken even when ce is low. The original work lets each NALE run at its
// own clock speed; expressing that as a clock enable on one shared clock is
// this design's choice.
//
// Control: `start` in the idle state begins execution at address 0; HALT
// returns to idle. busy is high while running; stall is high in a running
// cycle that could not retire its instruction. The external port x_* writes
// either memory and reads the data memory at any time.
module nale
  import gp_pkg::*;
#(
  parameter int unsigned IMEM_DEPTH  = 256,
  parameter int unsigned DMEM_DEPTH  = 256,
  parameter int unsigned NREG        = 8,
  parameter int unsigned NFIFO_DEPTH = 4,
  parameter int unsigned IFIFO_DEPTH = 8
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              ce,
  input  logic              start,
  output logic              busy,
  output logic              stall,
  // incoming neighbour links N, E, S, W
  input  logic [NDIR-1:0]   in_req,
  input  msg_t              in_msg [NDIR],
  output logic [NDIR-1:0]   in_ack,
  // outgoing links N, E, S, W, output logic
  output logic [NDIR:0]     out_req,
  output msg_t              out_msg [NDIR+1],
  input  logic [NDIR:0]     out_ack,
  // external access to local memories
  input  logic              x_imem_we,
  input  logic              x_dmem_we,
  input  logic [7:0]        x_addr,
  input  logic [DATA_W-1:0] x_wdata,
  output logic [DATA_W-1:0] x_rdata
);
  localparam int unsigned PCW = $clog2(IMEM_DEPTH);
  localparam int unsigned DAW = $clog2(DMEM_DEPTH);

  typedef enum logic {S_IDLE, S_RUN} state_e;
  state_e state;

  logic [PCW-1:0]    pc;
  logic [1:0]        flag;
  logic [DATA_W-1:0] bank_a [NREG];
  logic [DATA_W-1:0] bank_b [NREG];

  // ---------------- instruction fetch and decode ----------------
  logic [INSTR_W-1:0] instr;
  opcode_e            op;
  logic [2:0]         f_ra, f_rb, f_dest, f_id, f_sel;
  logic               running, exec;

  assign running = (state == S_RUN);
  assign exec    = running && ce;
  assign op      = opcode_e'(instr[15:12]);
  assign f_ra    = instr[5:3];
  assign f_rb    = instr[2:0];
  assign f_sel   = instr[8:6];
  assign f_dest  = instr[11:9];
  assign f_id    = instr[8:6];

  local_mem #(.WIDTH(INSTR_W), .DEPTH(IMEM_DEPTH)) u_imem (
    .clk, .c_we(1'b0), .c_addr(pc), .c_wdata('0), .c_rdata(instr),
    .x_we(x_imem_we), .x_addr(x_addr[PCW-1:0]), .x_wdata(x_wdata[INSTR_W-1:0]), .x_rdata()
  );

  // ---------------- neighbour registers, data memory ----------------
  logic [DATA_W-1:0] reg_a, reg_b;
  assign reg_a = bank_a[f_ra];
  assign reg_b = bank_b[f_rb];

  logic              dm_we;
  logic [DAW-1:0]    dm_addr;
  logic [DATA_W-1:0] dm_rdata, acc;

  always_comb begin
    if (op == OP_LD || op == OP_ST) dm_addr = instr[DAW-1:0];
    else                            dm_addr = reg_a[DAW-1:0];
  end
  assign dm_we = exec && (op == OP_ST);

  local_mem #(.WIDTH(DATA_W), .DEPTH(DMEM_DEPTH)) u_dmem (
    .clk, .c_we(dm_we), .c_addr(dm_addr), .c_wdata(acc), .c_rdata(dm_rdata),
    .x_we(x_dmem_we), .x_addr(x_addr[DAW-1:0]), .x_wdata(x_wdata), .x_rdata(x_rdata)
  );

  // ---------------- MAC and comparator ----------------
  logic              mul_en, acc_en, acc_keep;
  opsel_e            sel;
  logic [DATA_W-1:0] imm, x, hi, lo;
  logic              c_lt, c_eq, c_gt;
  logic [1:0]        c_code;

  always_comb begin
    imm      = {{(DATA_W-6){1'b0}}, instr[5:0]};
    sel      = opsel_e'(f_sel);
    acc_keep = instr[9];
    acc_en   = 1'b0;
    mul_en   = exec && (op == OP_MUL);
    unique case (op)
      OP_ACC:  acc_en = exec;
      OP_CMP:  begin
                 acc_keep = 1'b0;
                 acc_en   = exec && instr[9] && c_gt;   // keep the minimum
               end
      OP_LDI:  begin
                 imm = {{(DATA_W-12){1'b0}}, instr[11:0]};
                 sel = SEL_IMM; acc_keep = 1'b0; acc_en = exec;
               end
      OP_ADDI: begin
                 imm = {{(DATA_W-12){instr[11]}}, instr[11:0]};
                 sel = SEL_IMM; acc_keep = 1'b1; acc_en = exec;
               end
      default: ;
    endcase
  end

  nale_mac u_mac (
    .clk, .rst_n, .mul_en, .a(reg_a), .b(reg_b), .imm, .mem(dm_rdata), .sel,
    .acc_en, .acc_keep, .x, .acc, .hi, .lo
  );

  nale_comparator u_cmp (.a(acc), .b(x), .lt(c_lt), .eq(c_eq), .gt(c_gt), .code(c_code));

  // ---------------- FIFOs and incoming-link merge ----------------
  msg_t nf_din, nf_dout, if_dout, if_din;
  logic nf_push, nf_pop, nf_full, nf_empty;
  logic if_push, if_pop, if_full, if_empty;

  nale_fifo #(.WIDTH(MSG_W), .DEPTH(NFIFO_DEPTH)) u_nfifo (
    .clk, .rst_n, .push(nf_push), .din(nf_din), .full(nf_full),
    .pop(nf_pop), .dout(nf_dout), .empty(nf_empty), .count()
  );
  nale_fifo #(.WIDTH(MSG_W), .DEPTH(IFIFO_DEPTH)) u_ififo (
    .clk, .rst_n, .push(if_push), .din(if_din), .full(if_full),
    .pop(if_pop), .dout(if_dout), .empty(if_empty), .count()
  );

  logic [NDIR-1:0] pending, ack_q;
  logic [1:0]      rr, grant_idx;
  logic            grant;

  assign pending = in_req ^ ack_q;
  assign in_ack  = ack_q;

  always_comb begin
    grant     = 1'b0;
    grant_idx = rr;
    for (int k = 0; k < NDIR; k++) begin
      logic [1:0] idx;
      idx = rr + 2'(k);
      if (!grant && pending[idx]) begin
        grant     = 1'b1;
        grant_idx = idx;
      end
    end
  end
  assign nf_push = grant && !nf_full && ce;
  assign nf_din  = in_msg[grant_idx];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ack_q <= '0;
      rr    <= '0;
    end else if (nf_push) begin
      ack_q[grant_idx] <= ~ack_q[grant_idx];
      rr               <= grant_idx + 2'd1;
    end
  end

  // ---------------- execute / stall ----------------
  logic       recv_src;
  msg_t       recv_msg;
  logic       src_empty, link_free;
  logic [2:0] send_link;

  assign recv_src  = instr[11];
  assign recv_msg  = recv_src ? if_dout : nf_dout;
  assign src_empty = recv_src ? if_empty : nf_empty;
  assign send_link = (f_dest == DEST_OUT) ? 3'd4 : f_dest;

  always_comb begin
    link_free = 1'b1;
    if (f_dest == DEST_SELF)                           link_free = !if_full;
    else if (f_dest <= DIR_W || f_dest == DEST_OUT)    link_free = (out_req[send_link] == out_ack[send_link]);
  end

  always_comb begin
    stall = 1'b0;
    if (running) begin
      if (op == OP_RECV && src_empty) stall = 1'b1;
      if (op == OP_SEND && !link_free) stall = 1'b1;
    end
  end

  assign nf_pop  = exec && op == OP_RECV && !recv_src && !nf_empty;
  assign if_pop  = exec && op == OP_RECV &&  recv_src && !if_empty;
  assign if_push = exec && op == OP_SEND && f_dest == DEST_SELF && !if_full;
  assign if_din  = '{id: f_id, data: acc};
  assign busy    = running;

  logic branch_taken;
  assign branch_taken = ((flag == instr[11:10]) ^ instr[9]);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      pc      <= '0;
      flag    <= CMP_NONE;
      out_req <= '0;
      for (int k = 0; k <= NDIR; k++) out_msg[k] <= '0;
      for (int k = 0; k < NREG; k++) begin
        bank_a[k] <= '0;
        bank_b[k] <= '0;
      end
    end else if (state == S_IDLE) begin
      if (start) begin
        state <= S_RUN;
        pc    <= '0;
      end
    end else if (ce && !stall) begin
      pc <= pc + 1'b1;
      unique case (op)
        OP_RECV: begin
          logic [2:0] r;
          r = instr[6] ? recv_msg.id : instr[9:7];
          if (instr[10]) bank_b[r] <= recv_msg.data;
          else           bank_a[r] <= recv_msg.data;
        end
        OP_LD: begin
          if (instr[11]) bank_b[instr[10:8]] <= dm_rdata;
          else           bank_a[instr[10:8]] <= dm_rdata;
        end
        OP_CMP:  flag <= c_code;
        OP_SEND: begin
          if (f_dest <= DIR_W || f_dest == DEST_OUT) begin
            out_msg[send_link] <= '{id: f_id, data: acc};
            out_req[send_link] <= ~out_req[send_link];
          end
        end
        OP_BR:   if (branch_taken) pc <= instr[PCW-1:0];
        OP_JMP:  pc <= instr[PCW-1:0];
        OP_HALT: state <= S_IDLE;
        default: ;
      endcase
    end
  end
endmodule
