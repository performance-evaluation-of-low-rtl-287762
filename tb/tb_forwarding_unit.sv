// tb_forwarding_unit: random register numbers and write flags; the selects must
// prefer EXE/MEM over MEM/WB and never forward register 0.
module tb_forwarding_unit;
  logic [4:0] rs, rt, exmem_rd, memwb_rd;
  logic exmem_wr, memwb_wr;
  logic [1:0] fwd_a, fwd_b;
  int checks = 0, failures = 0;

  forwarding_unit dut (.rs, .rt, .exmem_wr, .exmem_rd, .memwb_wr, .memwb_rd, .fwd_a, .fwd_b);

  function automatic logic [1:0] expect_sel(logic [4:0] r);
    if (r == 0) return 2'b00;
    if (exmem_wr && exmem_rd == r) return 2'b10;
    if (memwb_wr && memwb_rd == r) return 2'b01;
    return 2'b00;
  endfunction

  initial begin
    for (int t = 0; t < 5000; t++) begin
      rs = 5'($urandom % 4); rt = 5'($urandom % 4);
      exmem_rd = 5'($urandom % 4); memwb_rd = 5'($urandom % 4);
      exmem_wr = 1'($urandom); memwb_wr = 1'($urandom);
      #1;
      checks++;
      if (fwd_a !== expect_sel(rs) || fwd_b !== expect_sel(rt)) begin
        failures++; $display("FAIL rs %0d rt %0d ex %0d/%b wb %0d/%b -> %b %b", rs, rt, exmem_rd, exmem_wr, memwb_rd, memwb_wr, fwd_a, fwd_b);
      end
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
