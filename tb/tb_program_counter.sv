// tb_program_counter: random hold/redirect sequences compared with a reference
// PC kept by the testbench; checks reset to 0 and pc_plus4.
module tb_program_counter;
  logic clk = 1'b0, rst_n = 1'b0, hold = 1'b1, redirect = 1'b0;
  logic [31:0] target = '0, pc, pc_plus4, exp = '0;
  int checks = 0, failures = 0;

  program_counter dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (2) @(negedge clk);
    checks++; if (pc !== 0) begin failures++; $display("FAIL reset pc %h", pc); end
    rst_n = 1'b1;
    for (int t = 0; t < 2000; t++) begin
      @(negedge clk);
      hold = ($urandom % 4 == 0); redirect = ($urandom % 5 == 0); target = $urandom & ~32'd3;
      @(posedge clk);
      exp = redirect ? target : (hold ? exp : exp + 4);
      #1;
      checks++;
      if (pc !== exp || pc_plus4 !== exp + 4) begin failures++; $display("FAIL pc %h expected %h", pc, exp); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
