// tb_tdes_core: checks Triple DES (E-D-E with three keys) against independently
// computed vectors in both directions, checks that three equal keys reduce to
// single DES (published vector), and checks the 16-clock block latency.
module tb_tdes_core;
  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0, decrypt = 1'b0;
  logic [63:0] k1, k2, k3, din, dout;
  logic busy, done;
  int checks = 0, failures = 0;

  tdes_core dut (.clk, .rst_n, .start, .decrypt, .key1(k1), .key2(k2), .key3(k3),
                 .din, .busy, .done, .dout);
  always #5 clk = ~clk;

  task automatic run(input logic [63:0] a, b, c, d, input logic dec, input logic [63:0] exp);
    int n;
    @(negedge clk);
    k1 = a; k2 = b; k3 = c; din = d; decrypt = dec; start = 1'b1;
    @(negedge clk);
    start = 1'b0; din = '0;
    n = 0;   // clocks after the one that sampled start
    while (!done) begin @(negedge clk); n++; end
    checks++;
    if (dout !== exp) begin failures++; $display("FAIL dout %h expected %h", dout, exp); end
    checks++;
    if (n != 16) begin failures++; $display("FAIL latency %0d, expected 16", n); end
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    run(64'he8e25d940ed90475, 64'h36f675cc81e74ef5, 64'h1600a35a099950d8,
        64'h6b0d549b6f03675a, 1'b0, 64'hb5738063edc2f690);
    run(64'he8e25d940ed90475, 64'h36f675cc81e74ef5, 64'h1600a35a099950d8,
        64'hb5738063edc2f690, 1'b1, 64'h6b0d549b6f03675a);
    run(64'h3d9c172411e20b8f, 64'h8d116ece1738f7d9, 64'h0f21ddb66cad4a26,
        64'h90c192cfd3ac94af, 1'b0, 64'hd624f9042c1f6af0);
    run(64'h133457799BBCDFF1, 64'h133457799BBCDFF1, 64'h133457799BBCDFF1,
        64'h0123456789ABCDEF, 1'b0, 64'h85E813540F0AB405);
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
