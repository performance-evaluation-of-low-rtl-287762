// tb_permutation_unit: drives the permutation network configured as the DES
// initial permutation, as IP^-1 and as the expansion E, and compares every output
// bit with a table walk done in the testbench; also checks that IP^-1(IP(x)) = x
// and the textbook example IP(0123456789ABCDEF) = CC00CCFFF0AAF0AA.
module tb_permutation_unit;
  import des_pkg::*;
  logic [63:0] x, ip, fp_of_ip;
  logic [31:0] r;
  logic [47:0] e;
  int checks = 0, failures = 0;

  permutation_unit dut_ip (.din(x), .dout(ip));
  permutation_unit #(.IN_W(64), .OUT_W(64), .TAB(FP_T)) dut_fp (.din(ip), .dout(fp_of_ip));
  permutation_unit #(.IN_W(32), .OUT_W(48), .TAB(E_T)) dut_e (.din(r), .dout(e));

  initial begin
    x = 64'h0123456789ABCDEF; r = 32'hF0AAF0AA;
    #1;
    checks++; if (ip !== 64'hCC00CCFFF0AAF0AA) begin failures++; $display("FAIL IP %h", ip); end
    checks++; if (e !== 48'h7A15557A1555) begin failures++; $display("FAIL E %h", e); end
    for (int t = 0; t < 200; t++) begin
      x = {$urandom, $urandom}; r = $urandom;
      #1;
      for (int k = 0; k < 64; k++) begin
        checks++;
        if (ip[63-k] !== x[64-IP_T[k]]) begin failures++; $display("FAIL IP bit %0d", k+1); end
      end
      for (int k = 0; k < 48; k++) begin
        checks++;
        if (e[47-k] !== r[32-E_T[k]]) begin failures++; $display("FAIL E bit %0d", k+1); end
      end
      checks++;
      if (fp_of_ip !== x) begin failures++; $display("FAIL IP^-1(IP(x)) %h %h", fp_of_ip, x); end
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
