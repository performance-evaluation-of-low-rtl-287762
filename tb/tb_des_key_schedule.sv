// tb_des_key_schedule: checks the subkeys K1 and K16 of the standard's worked
// example key 133457799BBCDFF1 and compares all 16 subkeys of random keys with a
// shift-register key schedule computed in the testbench.
module tb_des_key_schedule;
  import des_pkg::*;
  logic [63:0] key;
  logic [3:0]  round;
  logic [47:0] subkey;
  int checks = 0, failures = 0;
  localparam int SHIFTS [16] = '{1,1,2,2,2,2,2,2,1,2,2,2,2,2,2,1};

  des_key_schedule dut (.key, .round, .subkey);

  task automatic ref_check(input logic [63:0] k);
    logic [55:0] cd;
    logic [27:0] c, d;
    logic [47:0] exp;
    for (int j = 0; j < 56; j++) cd[55-j] = k[64-PC1_T[j]];
    c = cd[55:28]; d = cd[27:0];
    for (int n = 0; n < 16; n++) begin
      repeat (SHIFTS[n]) begin c = {c[26:0], c[27]}; d = {d[26:0], d[27]}; end
      for (int j = 0; j < 48; j++) exp[47-j] = {c, d}[56-PC2_T[j]];
      key = k; round = 4'(n);
      #1;
      checks++;
      if (subkey !== exp) begin failures++; $display("FAIL K%0d %h expected %h", n+1, subkey, exp); end
    end
  endtask

  initial begin
    key = 64'h133457799BBCDFF1; round = 0;
    #1;
    checks++; if (subkey !== 48'h1B02EFFC7072) begin failures++; $display("FAIL K1 %h", subkey); end
    round = 15;
    #1;
    checks++; if (subkey !== 48'hCB3D8B0E17F5) begin failures++; $display("FAIL K16 %h", subkey); end
    for (int t = 0; t < 20; t++) ref_check({$urandom, $urandom});
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #(100000);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
