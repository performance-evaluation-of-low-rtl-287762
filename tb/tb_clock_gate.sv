// tb_clock_gate: counts gated-clock pulses against the enable sampled at each
// rising clock edge and checks that gclk never rises while clk is steady, even
// when the enable changes in the high phase.
module tb_clock_gate;
  logic clk = 1'b0, en = 1'b0, gclk, sampled;
  int checks = 0, failures = 0, pulses = 0, expected = 0;

  clock_gate dut (.*);
  always #5 clk = ~clk;
  always @(posedge gclk) pulses++;

  initial begin
    for (int t = 0; t < 500; t++) begin
      en = 1'($urandom);
      @(posedge clk);
      sampled = en;
      if (en) expected++;
      #2 en = 1'($urandom);      // change in the high phase must not reach gclk
      #1;
      checks++;
      if (gclk !== sampled) begin failures++; $display("FAIL gclk %b in high phase, enable was %b", gclk, sampled); end
      @(negedge clk);
      #1;
      checks++;
      if (gclk !== 1'b0) begin failures++; $display("FAIL gclk high in low phase"); end
    end
    @(negedge clk);
    checks++;
    if (pulses != expected) begin failures++; $display("FAIL pulses %0d expected %0d", pulses, expected); end
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
