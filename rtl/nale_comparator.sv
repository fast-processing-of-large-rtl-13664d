// nale_comparator: three-state comparator and encoder of a NALE.
//
// Compares the accumulator (a) with an operand (b), unsigned, and raises
// exactly one of lt, eq, gt. The encoder turns that one-hot triple into the
// 2-bit code the control unit branches on: LT=01, EQ=10, GT=11 (00 never
// occurs). The three outputs and the 2-bit code follow the original drawing;
// the code values are this design's choice. Purely combinational.
module nale_comparator
  import gp_pkg::*;
(
  input  logic [DATA_W-1:0] a,
  input  logic [DATA_W-1:0] b,
  output logic              lt,
  output logic              eq,
  output logic              gt,
  output logic [1:0]        code
);
  assign lt = (a < b);
  assign eq = (a == b);
  assign gt = (a > b);

  always_comb begin
    unique case ({lt, eq, gt})
      3'b100:  code = CMP_LT;
      3'b010:  code = CMP_EQ;
      3'b001:  code = CMP_GT;
      default: code = CMP_NONE;
    endcase
  end
endmodule
