// tb_des_f: checks the DES cipher function f(R,K) against the worked example of
// the standard's first round (R0 = F0AAF0AA, K1 = 1B02EFFC7072 gives 234AA9BB)
// and against the loop-based reference model on random inputs.
module tb_des_f;
  logic [31:0] r, f;
  logic [47:0] k;
  int checks = 0, failures = 0;

  des_f dut (.r, .k, .f);

  initial begin
    r = 32'hF0AAF0AA; k = 48'h1B02EFFC7072;
    #1;
    checks++; if (f !== 32'h234AA9BB) begin failures++; $display("FAIL f %h", f); end
    for (int t = 0; t < 500; t++) begin
      r = $urandom; k = {$urandom, $urandom};
      #1;
      checks++;
      if (f !== des_model_pkg::f(r, k)) begin failures++; $display("FAIL f(%h,%h) = %h", r, k, f); end
    end
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
