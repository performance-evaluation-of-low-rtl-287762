// tb_data_mem: random mix of writes and reads over all 256 bytes compared with
// the testbench's copy; a read in a cycle without we must see the stored word.
module tb_data_mem;
  logic clk = 1'b0, we = 1'b0;
  logic [7:0] addr = '0;
  logic [31:0] wdata = '0, rdata;
  logic [31:0] shadow [64];
  int checks = 0, failures = 0;

  data_mem dut (.*);
  always #5 clk = ~clk;

  initial begin
    for (int w = 0; w < 64; w++) begin
      @(negedge clk); we = 1; addr = 8'(4 * w); wdata = 32'(w); shadow[w] = wdata;
    end
    for (int t = 0; t < 3000; t++) begin
      @(negedge clk);
      we = 1'($urandom); addr = 8'($urandom); wdata = $urandom;
      #1;
      if (!we) begin
        checks++;
        if (rdata !== shadow[addr[7:2]]) begin failures++; $display("FAIL %h: %h", addr, rdata); end
      end
      @(posedge clk);
      if (we) shadow[addr[7:2]] = wdata;
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
