// tb_hazard_unit: random situations; each output is compared with the priority
// rules written out independently in the testbench (not running > MEM crypto
// wait > EXE redirect > load-use > ID jump > IF crypto wait).
module tb_hazard_unit;
  logic running, if_wait, mem_wait, ex_redirect, id_jump, id_valid, id_uses_rs, id_uses_rt, ex_mem_read;
  logic [4:0] id_rs, id_rt, ex_rd;
  logic load_use, pc_hold, pc_redirect_ex, pc_redirect_id, ifid_hold, ifid_flush;
  logic idex_hold, idex_flush, exmem_hold, memwb_bubble, id_advance;
  int checks = 0, failures = 0, n_lu = 0;

  hazard_unit dut (.*);

  initial begin
    for (int t = 0; t < 5000; t++) begin
      logic lu, freeze;
      logic [10:0] exp, got;
      {running, if_wait, mem_wait, ex_redirect, id_jump, id_valid, id_uses_rs, id_uses_rt, ex_mem_read} = 9'($urandom);
      running = running | 1'($urandom);
      mem_wait = mem_wait & 1'($urandom); ex_redirect = ex_redirect & 1'($urandom);
      id_rs = 5'($urandom % 3); id_rt = 5'($urandom % 3); ex_rd = 5'($urandom % 3);
      #1;
      lu = ex_mem_read && ex_rd != 0 && id_valid && ((id_uses_rs && id_rs == ex_rd) || (id_uses_rt && id_rt == ex_rd));
      freeze = !running || mem_wait;
      exp = '0;
      // {pc_hold, redir_ex, redir_id, ifid_hold, ifid_flush, idex_hold, idex_flush, exmem_hold, memwb_bubble, id_advance, load_use}
      if (freeze)           exp = 11'b100_1010_110_0;
      else if (ex_redirect) exp = 11'b010_0101_000_0;
      else if (lu)          exp = 11'b100_1001_000_0;
      else if (id_jump)     exp = {3'b001, 4'b0100, 3'b000, id_valid};
      else if (if_wait)     exp = {3'b100, 4'b0100, 3'b000, id_valid};
      else                  exp = {10'b0, id_valid};
      exp = {exp[10:1], 1'b0};
      exp[0] = lu;
      if (!freeze && !ex_redirect && !lu) exp[1] = id_valid;
      got = {pc_hold, pc_redirect_ex, pc_redirect_id, ifid_hold, ifid_flush, idex_hold, idex_flush,
             exmem_hold, memwb_bubble, id_advance, load_use};
      if (lu) n_lu++;
      checks++;
      if (got !== exp) begin failures++; $display("FAIL got %b expected %b", got, exp); end
    end
    checks++;
    if (n_lu == 0) begin failures++; $display("FAIL no load-use case generated"); end
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
