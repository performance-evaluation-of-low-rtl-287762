// tb_des_core: checks the iterative DES core against published and independently
// computed FIPS 46-3 vectors, in both directions, and checks that each block
// takes exactly 16 clocks from the clock that samples start to done.
module tb_des_core;
  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0, decrypt = 1'b0;
  logic [63:0] key, din, dout;
  logic busy, done;
  int checks = 0, failures = 0;

  des_core dut (.clk, .rst_n, .start, .decrypt, .key, .din, .busy, .done, .dout);
  always #5 clk = ~clk;

  task automatic run(input logic [63:0] k, input logic [63:0] d, input logic dec,
                     input logic [63:0] exp);
    int n = 0;
    @(negedge clk);
    key = k; din = d; decrypt = dec; start = 1'b1;
    @(negedge clk);
    start = 1'b0; key = '0; din = '0;
    n = 0;   // clocks after the one that sampled start
    while (!done) begin @(negedge clk); n++; end
    checks++;
    if (dout !== exp) begin
      failures++; $display("FAIL dout %h expected %h", dout, exp);
    end
    checks++;
    if (n != 16) begin failures++; $display("FAIL latency %0d, expected 16", n); end
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    run(64'h133457799BBCDFF1, 64'h0123456789ABCDEF, 1'b0, 64'h85E813540F0AB405);
    run(64'h133457799BBCDFF1, 64'h85E813540F0AB405, 1'b1, 64'h0123456789ABCDEF);
    run(64'hf2a74de452e6b438, 64'h6513270e269e0d37, 1'b0, 64'h391bbccb4492fc51);
    run(64'h0c5c7fd0a6a3a450, 64'h57a4490e488dd87a, 1'b1, 64'hd23f0824128b2f33);
    run(64'h1818e811892f902b, 64'h9531985d5d9dc9f8, 1'b0, 64'h1c83b420f9b5ac73);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
