// tb_control_unit: decodes one instruction of every kind and compares the key
// control fields with the expected decoding of the instruction set.
module tb_control_unit;
  import mips_pkg::*;
  logic [31:0] instr;
  ctrl_t ctrl;
  int checks = 0, failures = 0;

  control_unit dut (.instr, .ctrl);

  // expected: {valid, reg_write, dst_rt, alu_imm, zero_ext, mem_read, mem_write,
  //            key_write, key_upper, branch, branch_ne, jump, link, jr, crypt, arith}
  task automatic t(input string name, input logic [31:0] i, input logic [15:0] exp,
                   input alu_op_e aop);
    logic [15:0] got;
    instr = i;
    #1;
    got = {ctrl.valid, ctrl.reg_write, ctrl.dst_rt, ctrl.alu_imm, ctrl.zero_ext, ctrl.mem_read,
           ctrl.mem_write, ctrl.key_write, ctrl.key_upper, ctrl.branch, ctrl.branch_ne,
           ctrl.jump, ctrl.link, ctrl.jr, ctrl.crypt, ctrl.arith};
    checks++;
    if (got !== exp || (exp[15] && ctrl.alu_op !== aop)) begin
      failures++; $display("FAIL %s: %b expected %b, alu %s", name, got, exp, ctrl.alu_op.name());
    end
  endtask

  function automatic logic [31:0] r(funct_e fn); return {OP_RTYPE, 5'd1, 5'd2, 5'd3, 5'd4, fn}; endfunction
  function automatic logic [31:0] i(opcode_e op); return {op, 5'd1, 5'd2, 16'h8001}; endfunction

  initial begin
    t("ADD",  r(FN_ADD), 16'b1100_0000_0000_0001, ALU_ADD);
    t("SUB",  r(FN_SUB), 16'b1100_0000_0000_0001, ALU_SUB);
    t("AND",  r(FN_AND), 16'b1100_0000_0000_0001, ALU_AND);
    t("OR",   r(FN_OR),  16'b1100_0000_0000_0001, ALU_OR);
    t("NOR",  r(FN_NOR), 16'b1100_0000_0000_0001, ALU_NOR);
    t("SLT",  r(FN_SLT), 16'b1100_0000_0000_0001, ALU_SLT);
    t("SLL",  r(FN_SLL), 16'b1100_0000_0000_0001, ALU_SLL);
    t("SRL",  r(FN_SRL), 16'b1100_0000_0000_0001, ALU_SRL);
    t("JR",   r(FN_JR),  16'b1000_0000_0000_0100, ALU_NOP);
    t("ADDI", i(OP_ADDI), 16'b1111_0000_0000_0001, ALU_ADD);
    t("SUBI", i(OP_SUBI), 16'b1111_0000_0000_0001, ALU_SUB);
    t("SLTI", i(OP_SLTI), 16'b1111_0000_0000_0001, ALU_SLT);
    t("ANDI", i(OP_ANDI), 16'b1111_1000_0000_0001, ALU_AND);
    t("ORI",  i(OP_ORI),  16'b1111_1000_0000_0001, ALU_OR);
    t("NORI", i(OP_NORI), 16'b1111_1000_0000_0001, ALU_NOR);
    t("LW",   i(OP_LW),   16'b1111_0100_0000_0000, ALU_ADD);
    t("SW",   i(OP_SW),   16'b1001_0010_0000_0000, ALU_ADD);
    t("LKLW", i(OP_LKLW), 16'b1011_0101_0000_0000, ALU_ADD);
    t("LKUW", i(OP_LKUW), 16'b1011_0101_1000_0000, ALU_ADD);
    t("BEQ",  i(OP_BEQ),  16'b1000_0000_0100_0000, ALU_NOP);
    t("BNE",  i(OP_BNE),  16'b1000_0000_0110_0000, ALU_NOP);
    t("J",    {OP_J, 26'd5},     16'b1000_0000_0001_0000, ALU_NOP);
    t("JAL",  {OP_JAL, 26'd5},   16'b1100_0000_0001_1001, ALU_NOP);
    t("CRYPT",{OP_CRYPT, 26'd1}, 16'b1000_0000_0000_0010, ALU_NOP);
    t("NOP",  32'd0,             16'b0000_0000_0000_0000, ALU_NOP);
    t("bad",  {6'b010000, 26'd0}, 16'b0000_0000_0000_0000, ALU_NOP);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #(100000);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
