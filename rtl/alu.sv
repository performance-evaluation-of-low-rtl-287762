// alu: the 32-bit arithmetic logic unit of the EXE stage.
//
// Operations: NOP (result 0), ADD, SUB, AND, OR, NOR, signed set-less-than, and the
// logical shifts SLL/SRL of operand A by a 5-bit shift amount.  Purely
// combinational; zero flags a zero result.  The operation list is the paper's;
// additions wrap (no overflow trap) and SLT compares as signed numbers, both
// choices of this design.
module alu
  import mips_pkg::*;
#(
  parameter int unsigned W = 32
) (
  input  alu_op_e        op,
  input  logic [W-1:0]   a,
  input  logic [W-1:0]   b,
  input  logic [4:0]     shamt,
  output logic [W-1:0]   y,
  output logic           zero
);
  always_comb begin
    unique case (op)
      ALU_ADD: y = a + b;
      ALU_SUB: y = a - b;
      ALU_AND: y = a & b;
      ALU_OR:  y = a | b;
      ALU_NOR: y = ~(a | b);
      ALU_SLT: y = W'($signed(a) < $signed(b));
      ALU_SLL: y = a << shamt;
      ALU_SRL: y = a >> shamt;
      default: y = '0;   // ALU_NOP
    endcase
  end
  assign zero = (y == '0);
endmodule
