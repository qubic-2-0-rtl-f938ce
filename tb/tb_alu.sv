// tb_alu: random operands for every operation against a behavioural model.
// 600 iterations drive op, a and b with $urandom values. Every 7th
// iteration sets b = a and every 11th sets b = a + 1, so the equal and
// near-equal compares are hit often. y is compared with a model written
// with plain SystemVerilog operators; signed compares use longint. Purely
// combinational: each check is made 1 ns after the inputs change. The
// operation set (add, sub and compares) is the paper's; the 0/1 compare
// result and the op encoding are this design's.
module tb_alu;
  import qubic_pkg::*;
  alu_op_e op;
  logic signed [31:0] a, b, y, e;
  int checks = 0, failures = 0;
  alu #(.W(32)) dut (.op, .a, .b, .y);

  initial begin
    for (int n = 0; n < 600; n++) begin
      op = alu_op_e'(n % 6);
      a = $signed($urandom);
      b = (n % 7 == 0) ? a : $signed($urandom);
      if (n % 11 == 0) b = a + 1;
      #1;
      case (op)
        ALU_ADD: e = a + b;
        ALU_SUB: e = a - b;
        ALU_EQ:  e = (a == b) ? 1 : 0;
        ALU_NE:  e = (a != b) ? 1 : 0;
        ALU_LT:  e = (longint'(a) < longint'(b)) ? 1 : 0;
        default: e = (longint'(a) >= longint'(b)) ? 1 : 0;
      endcase
      checks++;
      if (y !== e) begin
        failures++;
        $display("FAIL: op %s a %0d b %0d y %0d exp %0d", op.name(), a, b, y, e);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
