// alu: the processor core's arithmetic unit.
//
// Signed 32-bit addition and subtraction, and the comparisons equal, not
// equal, less-than and greater-or-equal, which return 1 or 0. The paper
// gives the operation classes and the signed 32-bit width; the exact set
// of comparisons and their encoding (qubic_pkg::alu_op_e) is this design's.
// Purely combinational; the core registers the result.
module alu
  import qubic_pkg::*;
#(
  parameter int W = 32
) (
  input  alu_op_e             op,
  input  logic signed [W-1:0] a,
  input  logic signed [W-1:0] b,
  output logic signed [W-1:0] y
);
  always_comb begin
    unique case (op)
      ALU_ADD: y = a + b;
      ALU_SUB: y = a - b;
      ALU_EQ:  y = W'(a == b);
      ALU_NE:  y = W'(a != b);
      ALU_LT:  y = W'(a <  b);
      ALU_GE:  y = W'(a >= b);
      default: y = '0;
    endcase
  end
endmodule
