// tb_key_register: writes the six key words in random order and checks the
// packed key output word by word, and that wr follows every write.
module tb_key_register;
  logic clk = 1'b0, we = 1'b0, wr;
  logic [2:0] waddr = '0;
  logic [31:0] wdata = '0;
  logic [191:0] keys;
  logic [31:0] shadow [6];
  int checks = 0, failures = 0;

  key_register dut (.*);
  always #5 clk = ~clk;

  initial begin
    for (int i = 0; i < 6; i++) begin
      @(negedge clk); we = 1; waddr = 3'(i); wdata = 32'hA000_0000 + i; shadow[i] = wdata;
    end
    for (int t = 0; t < 500; t++) begin
      @(negedge clk);
      we = 1'($urandom); waddr = 3'($urandom % 6); wdata = $urandom;
      #1;
      checks++; if (wr !== we) begin failures++; $display("FAIL wr"); end
      @(posedge clk);
      if (we) shadow[waddr] = wdata;
      #1;
      for (int i = 0; i < 6; i++) begin
        checks++;
        if (keys[32*i +: 32] !== shadow[i]) begin failures++; $display("FAIL word %0d %h", i, keys[32*i +: 32]); end
      end
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
