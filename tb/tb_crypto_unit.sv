// tb_crypto_unit: the DES-based word unit must return din ^ keystream, with the
// keystream computed by the independent DES model from key slot 0, domain and
// address; a new address costs 18 clocks until ready, a repeated address is
// ready at once, and a key write discards the kept keystream (also one being
// computed).
module tb_crypto_unit;
  logic clk = 1'b0, rst_n = 1'b0, req = 1'b0, key_wr = 1'b0, ready;
  logic [31:0] addr = '0, din = '0, dout;
  logic [191:0] keys = '0;
  int checks = 0, failures = 0;

  crypto_unit #(.DOMAIN(8'h02)) dut (.*);
  always #5 clk = ~clk;

  task automatic access(input logic [31:0] a, input logic [31:0] d, input int exp_lat);
    int n = 0;
    @(negedge clk);
    req = 1; addr = a; din = d;
    #1;
    while (!ready) begin @(negedge clk); #1; n++; end
    checks++;
    if (dout !== (d ^ des_model_pkg::keystream(keys[63:0], 8'h02, a))) begin
      failures++; $display("FAIL dout %h for %h", dout, a);
    end
    if (exp_lat >= 0) begin
      checks++;
      if (n != exp_lat) begin failures++; $display("FAIL latency %0d expected %0d", n, exp_lat); end
    end
    @(negedge clk); req = 0;
  endtask

  initial begin
    keys[63:0] = 64'h133457799BBCDFF1;
    repeat (2) @(negedge clk);
    rst_n = 1;
    access(32'h10, 32'hDEADBEEF, 18);
    access(32'h10, 32'h01234567, 0);
    access(32'h14, 32'h0, 18);
    for (int t = 0; t < 5; t++) access($urandom & 32'hfc, $urandom, -1);
    // key change while idle
    @(negedge clk); keys[63:0] = 64'h0E329232EA6D0D73; key_wr = 1;
    @(negedge clk); key_wr = 0;
    access(32'h14, 32'h5555AAAA, 18);
    // key change in the middle of a computation
    @(negedge clk); req = 1; addr = 32'h20; din = 32'h1;
    repeat (5) @(negedge clk);
    keys[63:0] = 64'h0123456789ABCDEF; key_wr = 1;
    @(negedge clk); key_wr = 0; req = 0;
    access(32'h20, 32'h77, -1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
