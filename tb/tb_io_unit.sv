// tb_io_unit: in reset mode, host writes to each of the four regions must raise
// exactly the matching write strobe with the buffered address and data one cycle
// later; host reads must return the data-memory or register value two cycles
// later; in running mode requests must be ignored.
module tb_io_unit;
  logic clk = 1'b0, reset_n = 1'b0, host_we = 1'b0, host_re = 1'b0;
  logic [9:0] host_addr = '0;
  logic [31:0] host_wdata = '0, host_rdata, wdata, dmem_rdata, reg_rdata;
  logic [7:0] addr;
  logic imem_we, dmem_we, reg_we, key_we, active;
  int checks = 0, failures = 0;

  io_unit dut (.*);
  always #5 clk = ~clk;
  assign dmem_rdata = {24'hD0D0D0, addr};
  assign reg_rdata  = {24'hE0E0E0, addr};

  initial begin
    for (int t = 0; t < 400; t++) begin
      logic [9:0] a; logic [31:0] d; logic w, run;
      a = 10'($urandom); d = $urandom; w = 1'($urandom); run = (t % 7 == 3);
      @(negedge clk);
      reset_n = run; host_addr = a; host_wdata = d; host_we = w; host_re = !w;
      @(negedge clk);
      host_we = 0; host_re = 0;
      checks++;
      if (run) begin
        if (imem_we | dmem_we | reg_we | key_we) begin failures++; $display("FAIL write while running"); end
        reset_n = 0;
      end else if (w) begin
        if ({imem_we, dmem_we, reg_we, key_we} !== 4'(4'b1000 >> a[9:8]) || addr !== a[7:0] || wdata !== d) begin
          failures++; $display("FAIL write %h: strobes %b", a, {imem_we, dmem_we, reg_we, key_we});
        end
      end else begin
        @(negedge clk);
        if (host_rdata !== ((a[9:8] == 2'd1) ? {24'hD0D0D0, a[7:0]} : {24'hE0E0E0, a[7:0]})) begin
          failures++; $display("FAIL read %h: %h", a, host_rdata);
        end
      end
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
