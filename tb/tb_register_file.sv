// tb_register_file: random writes and reads against a shadow array kept by the
// testbench; checks $0 reads zero, write-through of a same-cycle write, and that
// cycles without we leave the contents unchanged (write clock gated).
module tb_register_file;
  logic clk = 1'b0, we = 1'b0;
  logic [4:0] waddr = '0, raddr1 = '0, raddr2 = '0;
  logic [31:0] wdata = '0, rdata1, rdata2;
  logic [31:0] shadow [32];
  int checks = 0, failures = 0;

  register_file dut (.*);
  always #5 clk = ~clk;

  function automatic logic [31:0] expv(logic [4:0] a);
    if (a == 0) return 0;
    if (we && a == waddr) return wdata;
    return shadow[a];
  endfunction

  initial begin
    for (int r = 0; r < 32; r++) begin
      @(negedge clk); we = 1; waddr = 5'(r); wdata = 32'(r * 3 + 1); shadow[r] = wdata;
    end
    for (int t = 0; t < 3000; t++) begin
      @(negedge clk);
      we = 1'($urandom); waddr = 5'($urandom); wdata = $urandom;
      raddr1 = (t % 5 == 0) ? waddr : 5'($urandom); raddr2 = 5'($urandom);
      #1;
      checks++;
      if (rdata1 !== expv(raddr1) || rdata2 !== expv(raddr2)) begin
        failures++; $display("FAIL read %0d/%0d: %h %h", raddr1, raddr2, rdata1, rdata2);
      end
      @(posedge clk);
      if (we) shadow[waddr] = wdata;
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
