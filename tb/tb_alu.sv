// tb_alu: random and corner operands for every ALU operation, compared with
// results computed by the testbench's own expressions.
module tb_alu;
  import mips_pkg::*;
  alu_op_e op;
  logic [31:0] a, b, y, exp;
  logic [4:0] shamt;
  logic zero;
  int checks = 0, failures = 0;

  alu dut (.op, .a, .b, .shamt, .y, .zero);

  initial begin
    for (int t = 0; t < 2000; t++) begin
      op = alu_op_e'(t % 9);
      a = (t % 17 == 0) ? 32'h8000_0000 : $urandom;
      b = (t % 13 == 0) ? a : $urandom;
      shamt = 5'($urandom);
      #1;
      case (op)
        ALU_ADD: exp = a + b;
        ALU_SUB: exp = a - b;
        ALU_AND: exp = a & b;
        ALU_OR:  exp = a | b;
        ALU_NOR: exp = ~(a | b);
        ALU_SLT: exp = ($signed(a) < $signed(b)) ? 32'd1 : 32'd0;
        ALU_SLL: exp = a << shamt;
        ALU_SRL: exp = a >> shamt;
        default: exp = 32'd0;
      endcase
      checks++;
      if (y !== exp || zero !== (exp == 0)) begin
        failures++; $display("FAIL op %s a %h b %h: %h expected %h", op.name(), a, b, y, exp);
      end
    end
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
