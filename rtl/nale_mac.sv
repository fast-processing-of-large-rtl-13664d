// nale_mac: multiply-and-accumulate unit of a NALE.
//
// A 32x32-bit unsigned multiplier writes its 64-bit product into the Hi and
// Lo registers when mul_en is high. The accumulator adds an operand chosen by
// `sel` (Lo, Hi, neighbour bank A, bank B, immediate, data-memory word) to
// either its own value (acc_keep=1) or zero (acc_keep=0) when acc_en is high.
// The widths (32-bit operands, 64-bit product, 32-bit Hi/Lo/accumulator)
// follow the original drawing; the operand set and unsigned arithmetic are
// this design's choice. `x` is the selected operand, shared with the
// comparator. All results are registered: they are visible one cycle after
// the enable. Reset clears Hi, Lo and the accumulator.
module nale_mac
  import gp_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              mul_en,
  input  logic [DATA_W-1:0] a,
  input  logic [DATA_W-1:0] b,
  input  logic [DATA_W-1:0] imm,
  input  logic [DATA_W-1:0] mem,
  input  opsel_e            sel,
  input  logic              acc_en,
  input  logic              acc_keep,
  output logic [DATA_W-1:0] x,
  output logic [DATA_W-1:0] acc,
  output logic [DATA_W-1:0] hi,
  output logic [DATA_W-1:0] lo
);
  logic [2*DATA_W-1:0] product;

  assign product = a * b;

  always_comb begin
    unique case (sel)
      SEL_LO:  x = lo;
      SEL_HI:  x = hi;
      SEL_A:   x = a;
      SEL_B:   x = b;
      SEL_IMM: x = imm;
      SEL_MEM: x = mem;
      default: x = '0;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      hi  <= '0;
      lo  <= '0;
      acc <= '0;
    end else begin
      if (mul_en) {hi, lo} <= product;
      if (acc_en) acc <= (acc_keep ? acc : '0) + x;
    end
  end
endmodule
