// tb_instr_mem: fills all 64 words through the write port, then reads random
// byte addresses and compares with the testbench's copy.
module tb_instr_mem;
  logic clk = 1'b0, we = 1'b0;
  logic [7:0] waddr = '0, raddr = '0;
  logic [31:0] wdata = '0, rdata;
  logic [31:0] shadow [64];
  int checks = 0, failures = 0;

  instr_mem dut (.*);
  always #5 clk = ~clk;

  initial begin
    for (int w = 0; w < 64; w++) begin
      @(negedge clk); we = 1; waddr = 8'(4 * w); wdata = $urandom; shadow[w] = wdata;
    end
    @(negedge clk); we = 0;
    for (int t = 0; t < 1000; t++) begin
      @(negedge clk);
      raddr = 8'($urandom);
      #1;
      checks++;
      if (rdata !== shadow[raddr[7:2]]) begin failures++; $display("FAIL %h: %h", raddr, rdata); end
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
