// gp_pkg: types and constants shared by the graph processor.
//
// The data path is 32 bits wide and an instruction is 16 bits, as in the
// NALE micro-architecture drawing. A message travelling between NALEs is a
// 32-bit value with a 3-bit ID; the ID is a tag chosen by the sender (for
// instance which of the receiver's neighbour registers the value is meant for).
// The opcode table below is this design's own instruction set: the original
// work states that a specialised ISA exists but does not publish it.
//
// Instruction format (16 bits): op[15:12], then fields by opcode:
//   NOP                                   no operation
//   RECV  [11]src [10]bank [9:7]reg [6]use_id
//                                         pop neighbour FIFO (src=0) or internal
//                                         FIFO (src=1) into neighbour register;
//                                         use_id=1 takes the register index from
//                                         the message ID. Stalls while empty.
//   LD    [11]bank [10:8]reg [7:0]addr    data memory -> neighbour register
//   ST    [7:0]addr                       accumulator -> data memory
//   MUL   [5:3]ra [2:0]rb                 {hi,lo} = A[ra] * B[rb]
//   ACC   [9]keep [8:6]sel [5:3]ra [2:0]rb acc = (keep ? acc : 0) + operand(sel)
//   CMP   [9]min [8:6]sel [5:3]ra [2:0]rb flag = code(acc ? operand);
//                                         min=1 also loads operand when it is smaller
//   SEND  [11:9]dest [8:6]id              send acc with id to N/E/S/W, self
//                                         (internal FIFO) or the output logic.
//                                         Stalls while the link is busy.
//   BR    [11:10]code [9]neg [7:0]target  branch if (flag == code) xor neg
//   JMP   [7:0]target
//   LDI   [11:0]imm                       acc = zero-extended imm
//   ADDI  [11:0]imm                       acc = acc + sign-extended imm
//   HALT                                  stop; the NALE becomes idle
// ACC/CMP operand select: 0 lo, 1 hi, 2 A[ra], 3 B[rb], 4 immediate field
// [5:0] zero-extended (ra/rb bits), 5 data memory word at address A[ra][7:0].
package gp_pkg;

  localparam int unsigned DATA_W  = 32;
  localparam int unsigned INSTR_W = 16;
  localparam int unsigned ID_W    = 3;
  localparam int unsigned NDIR    = 4;
  localparam int unsigned MSG_W   = DATA_W + ID_W;

  typedef struct packed {
    logic [ID_W-1:0]   id;
    logic [DATA_W-1:0] data;
  } msg_t;

  typedef enum logic [3:0] {
    OP_NOP  = 4'h0,
    OP_RECV = 4'h1,
    OP_LD   = 4'h2,
    OP_ST   = 4'h3,
    OP_MUL  = 4'h4,
    OP_ACC  = 4'h5,
    OP_CMP  = 4'h6,
    OP_SEND = 4'h7,
    OP_BR   = 4'h8,
    OP_JMP  = 4'h9,
    OP_LDI  = 4'hA,
    OP_ADDI = 4'hB,
    OP_HALT = 4'hF
  } opcode_e;

  // Link directions. DEST_SELF and DEST_OUT are SEND destinations only.
  localparam logic [2:0] DIR_N     = 3'd0;
  localparam logic [2:0] DIR_E     = 3'd1;
  localparam logic [2:0] DIR_S     = 3'd2;
  localparam logic [2:0] DIR_W     = 3'd3;
  localparam logic [2:0] DEST_SELF = 3'd4;
  localparam logic [2:0] DEST_OUT  = 3'd5;

  // Operand select of the accumulator / comparator input multiplexer.
  typedef enum logic [2:0] {
    SEL_LO  = 3'd0,
    SEL_HI  = 3'd1,
    SEL_A   = 3'd2,
    SEL_B   = 3'd3,
    SEL_IMM = 3'd4,
    SEL_MEM = 3'd5
  } opsel_e;

  // Encoded three-state comparator result.
  localparam logic [1:0] CMP_NONE = 2'b00;
  localparam logic [1:0] CMP_LT   = 2'b01;
  localparam logic [1:0] CMP_EQ   = 2'b10;
  localparam logic [1:0] CMP_GT   = 2'b11;

  // Dispatch stream commands (header word bits [31:28]).
  localparam logic [3:0] DCMD_IMEM  = 4'h1;
  localparam logic [3:0] DCMD_DMEM  = 4'h2;
  localparam logic [3:0] DCMD_START = 4'h3;
  localparam logic [11:0] NALE_ALL  = 12'hFFF;

  // Tag byte of an encoded result record.
  localparam logic [7:0] RES_TAG = 8'hA5;

  // Status reported by the monitor to the co-processor.
  typedef struct packed {
    logic        done;
    logic [31:0] run_cycles;
    logic [31:0] stall_cycles;
    logic [31:0] results;
    logic [15:0] halts;
  } mon_status_t;

  // Instruction builders, used by testbenches and program generators.
  function automatic logic [15:0] i_recv(input logic src, input logic bank, input logic [2:0] r, input logic use_id);
    return {OP_RECV, src, bank, r, use_id, 6'd0};
  endfunction
  function automatic logic [15:0] i_ld(input logic bank, input logic [2:0] r, input logic [7:0] addr);
    return {OP_LD, bank, r, addr};
  endfunction
  function automatic logic [15:0] i_st(input logic [7:0] addr);
    return {OP_ST, 4'd0, addr};
  endfunction
  function automatic logic [15:0] i_mul(input logic [2:0] ra, input logic [2:0] rb);
    return {OP_MUL, 6'd0, ra, rb};
  endfunction
  function automatic logic [15:0] i_acc(input logic keep, input opsel_e sel, input logic [2:0] ra, input logic [2:0] rb);
    return {OP_ACC, 2'd0, keep, sel, ra, rb};
  endfunction
  function automatic logic [15:0] i_cmp(input logic mn, input opsel_e sel, input logic [2:0] ra, input logic [2:0] rb);
    return {OP_CMP, 2'd0, mn, sel, ra, rb};
  endfunction
  function automatic logic [15:0] i_send(input logic [2:0] dest, input logic [2:0] id);
    return {OP_SEND, dest, id, 6'd0};
  endfunction
  function automatic logic [15:0] i_br(input logic [1:0] code, input logic neg, input logic [7:0] target);
    return {OP_BR, code, neg, 1'b0, target};
  endfunction
  function automatic logic [15:0] i_jmp(input logic [7:0] target);
    return {OP_JMP, 4'd0, target};
  endfunction
  function automatic logic [15:0] i_ldi(input logic [11:0] imm);
    return {OP_LDI, imm};
  endfunction
  function automatic logic [15:0] i_addi(input logic [11:0] imm);
    return {OP_ADDI, imm};
  endfunction
  function automatic logic [15:0] i_halt();
    return {OP_HALT, 12'd0};
  endfunction

endpackage
