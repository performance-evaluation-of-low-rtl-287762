// tb_aes_core: checks AES-128 encryption and decryption against the FIPS-197
// example vectors and an independently computed one, then random blocks and keys
// against the behavioural model in aes_model_pkg (encryption) and round trips
// (decryption of the result).  Checks the block latency: 40 clocks for
// encryption (10 rounds x 4 columns), 50 for decryption (10 clocks of key
// preparation first).
module tb_aes_core;
  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0;
  logic [127:0] key, din, dout;
  logic busy, done, decrypt = 1'b0;
  int checks = 0, failures = 0;

  aes_core dut (.clk, .rst_n, .start, .decrypt, .key, .din, .busy, .done, .dout);
  always #5 clk = ~clk;

  task automatic run(input logic [127:0] k, d, exp, input logic dec = 1'b0);
    int n;
    @(negedge clk);
    key = k; din = d; start = 1'b1; decrypt = dec;
    @(negedge clk);
    start = 1'b0; key = '0; din = '0; decrypt = ~dec;
    n = 0;   // clocks after the one that sampled start
    while (!done) begin @(negedge clk); n++; end
    checks++;
    if (dout !== exp) begin failures++; $display("FAIL dout %h expected %h", dout, exp); end
    checks++;
    if (n != (dec ? 50 : 40)) begin failures++; $display("FAIL latency %0d, expected %0d", n, dec ? 50 : 40); end
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    run(128'h000102030405060708090a0b0c0d0e0f, 128'h00112233445566778899aabbccddeeff,
        128'h69c4e0d86a7b0430d8cdb78070b4c55a);
    run(128'h2b7e151628aed2a6abf7158809cf4f3c, 128'h3243f6a8885a308d313198a2e0370734,
        128'h3925841d02dc09fbdc118597196a0b32);
    run(128'ha170b33839263059f28c105d1fb17c23, 128'h0fd630f1f29d0da9953f48f1a09f76b5,
        128'h587c0137e6856d75055f0f36bd68cbc5);
    run(128'h000102030405060708090a0b0c0d0e0f, 128'h69c4e0d86a7b0430d8cdb78070b4c55a,
        128'h00112233445566778899aabbccddeeff, 1'b1);
    run(128'h2b7e151628aed2a6abf7158809cf4f3c, 128'h3925841d02dc09fbdc118597196a0b32,
        128'h3243f6a8885a308d313198a2e0370734, 1'b1);
    for (int i = 0; i < 20; i++) begin
      logic [127:0] k, p, c;
      k = {$urandom, $urandom, $urandom, $urandom};
      p = {$urandom, $urandom, $urandom, $urandom};
      c = aes_model_pkg::aes128(k, p);
      run(k, p, c);
      run(k, c, p, 1'b1);
    end
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
