// tb_sign_extender: every 16-bit immediate, sign- and zero-extended, compared
// with the testbench's arithmetic.
module tb_sign_extender;
  logic [15:0] imm;
  logic zero_ext;
  logic [31:0] y;
  int checks = 0, failures = 0;

  sign_extender dut (.imm, .zero_ext, .y);

  initial begin
    for (int v = 0; v < 65536; v += 7) begin
      imm = 16'(v);
      zero_ext = 1'b0; #1;
      checks++; if ($signed(y) != (v >= 32768 ? v - 65536 : v)) begin failures++; $display("FAIL sext %h -> %h", imm, y); end
      zero_ext = 1'b1; #1;
      checks++; if (y != 32'(v)) begin failures++; $display("FAIL zext %h -> %h", imm, y); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #(1000000);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
