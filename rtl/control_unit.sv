// control_unit: instruction decoder of the ID stage, including the ALU control.
//
// Maps opcode (and funct for R-type) to the ctrl_t control word that travels down
// the pipeline: register write and destination, immediate selection and
// extension, memory read/write, key-register write (LKLW/LKUW), branch/jump kind,
// CRYPT, the ALU operation, and whether the instruction is arithmetic (eligible
// to skip the MEM stage in the low-power bypass mode).  All-zero instructions
// (sll $0,$0,0) and unknown codes decode as bubbles.  Combinational.
module control_unit
  import mips_pkg::*;
(
  input  logic [31:0] instr,
  output ctrl_t       ctrl
);
  logic [5:0] op, fn;
  assign op = instr[31:26];
  assign fn = instr[5:0];

  always_comb begin
    ctrl = '0;
    ctrl.alu_op = ALU_NOP;
    if (instr != 32'd0) begin
      unique case (op)
        OP_RTYPE: begin
          ctrl.valid = 1'b1; ctrl.reg_write = 1'b1; ctrl.arith = 1'b1;
          ctrl.uses_rs = 1'b1; ctrl.uses_rt = 1'b1;
          unique case (fn)
            FN_ADD: ctrl.alu_op = ALU_ADD;
            FN_SUB: ctrl.alu_op = ALU_SUB;
            FN_AND: ctrl.alu_op = ALU_AND;
            FN_OR:  ctrl.alu_op = ALU_OR;
            FN_NOR: ctrl.alu_op = ALU_NOR;
            FN_SLT: ctrl.alu_op = ALU_SLT;
            FN_SLL: begin ctrl.alu_op = ALU_SLL; ctrl.uses_rt = 1'b0; end
            FN_SRL: begin ctrl.alu_op = ALU_SRL; ctrl.uses_rt = 1'b0; end
            FN_JR: begin
              ctrl.reg_write = 1'b0; ctrl.arith = 1'b0; ctrl.jr = 1'b1; ctrl.uses_rt = 1'b0;
            end
            default: ctrl = '0;
          endcase
        end
        OP_ADDI, OP_SUBI, OP_SLTI, OP_ANDI, OP_ORI, OP_NORI: begin
          ctrl.valid = 1'b1; ctrl.reg_write = 1'b1; ctrl.arith = 1'b1;
          ctrl.dst_rt = 1'b1; ctrl.alu_imm = 1'b1; ctrl.uses_rs = 1'b1;
          unique case (op)
            OP_ADDI: ctrl.alu_op = ALU_ADD;
            OP_SUBI: ctrl.alu_op = ALU_SUB;
            OP_SLTI: ctrl.alu_op = ALU_SLT;
            OP_ANDI: begin ctrl.alu_op = ALU_AND; ctrl.zero_ext = 1'b1; end
            OP_ORI:  begin ctrl.alu_op = ALU_OR;  ctrl.zero_ext = 1'b1; end
            default: begin ctrl.alu_op = ALU_NOR; ctrl.zero_ext = 1'b1; end
          endcase
        end
        OP_LW, OP_LKLW, OP_LKUW: begin
          ctrl.valid = 1'b1; ctrl.mem_read = 1'b1; ctrl.alu_imm = 1'b1;
          ctrl.uses_rs = 1'b1; ctrl.alu_op = ALU_ADD; ctrl.dst_rt = 1'b1;
          if (op == OP_LW) ctrl.reg_write = 1'b1;
          else begin
            ctrl.key_write = 1'b1; ctrl.key_upper = (op == OP_LKUW);
          end
        end
        OP_SW: begin
          ctrl.valid = 1'b1; ctrl.mem_write = 1'b1; ctrl.alu_imm = 1'b1;
          ctrl.uses_rs = 1'b1; ctrl.uses_rt = 1'b1; ctrl.alu_op = ALU_ADD;
        end
        OP_BEQ, OP_BNE: begin
          ctrl.valid = 1'b1; ctrl.branch = 1'b1; ctrl.branch_ne = (op == OP_BNE);
          ctrl.uses_rs = 1'b1; ctrl.uses_rt = 1'b1;
        end
        OP_J:     begin ctrl.valid = 1'b1; ctrl.jump = 1'b1; end
        OP_JAL:   begin
          ctrl.valid = 1'b1; ctrl.jump = 1'b1; ctrl.link = 1'b1; ctrl.reg_write = 1'b1;
          ctrl.arith = 1'b1;
        end
        OP_CRYPT: begin ctrl.valid = 1'b1; ctrl.crypt = 1'b1; end
        default:  ctrl = '0;
      endcase
    end
  end
endmodule
