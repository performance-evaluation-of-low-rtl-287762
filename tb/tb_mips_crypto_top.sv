// tb_mips_crypto_top: end-to-end test of the MIPS crypto processor at its default
// parameters (DES, 256-byte instruction and data memories).
//
// In reset mode the host port clears all registers, loads the program and the
// key words into the memories.  The program first runs in plain mode and covers
// every instruction class: ALU forwarding, the MEM-stage bypass after a store,
// the load-use wait, taken and not-taken branches, J, JAL and JR.  It then loads a
// 64-bit key with LKLW/LKUW and switches the crypt mode on with CRYPT; the next
// instructions are stored encrypted in the instruction memory (encrypted here with
// an independent DES model) and exercise an encrypted store, a decrypting load and
// a load-use wait under crypto stalls; CRYPT 0 returns to plain mode and a plain
// load reads the stored ciphertext back.  Afterwards the host reads back every
// register and the data words and compares them with values worked out by hand.
// Counters record how often each pipeline mechanism occurred; one that never did
// is a failure.  The fetch interval of an encrypted instruction (without a MEM
// crypto wait in between) is checked to be 19 clocks: start, 16 DES rounds,
// keystream capture, IF/ID load.
module tb_mips_crypto_top;
  import mips_pkg::*;
  import des_model_pkg::*;

  logic        clk = 1'b0, reset_n = 1'b0, start = 1'b0, crypt_enable = 1'b0;
  logic        ready, host_we = 1'b0, host_re = 1'b0;
  logic [9:0]  host_addr = '0;
  logic [31:0] host_wdata = '0, host_rdata;
  int checks = 0, failures = 0;

  mips_crypto_top dut (.clk, .reset_n, .start, .crypt_enable, .ready, .host_addr,
                       .host_wdata, .host_we, .host_re, .host_rdata);
  always #5 clk = ~clk;

  // ------------------------------------------------------------ assembler
  function automatic logic [31:0] rtype(funct_e fn, int rd, int rs, int rt, int sh = 0);
    return {OP_RTYPE, 5'(rs), 5'(rt), 5'(rd), 5'(sh), fn};
  endfunction
  function automatic logic [31:0] itype(opcode_e op, int rt, int rs, int imm);
    return {op, 5'(rs), 5'(rt), 16'(imm)};
  endfunction
  function automatic logic [31:0] jtype(opcode_e op, int target);
    return {op, 26'(target)};
  endfunction

  localparam logic [63:0] KEY = 64'h133457799BBCDFF1;
  localparam int CRYPT_FIRST = 32, CRYPT_LAST = 36, END_WORD = 38;
  logic [31:0] prog [64];

  task automatic host_write(input logic [9:0] a, input logic [31:0] d);
    @(negedge clk);
    host_addr = a; host_wdata = d; host_we = 1'b1;
    @(negedge clk);
    host_we = 1'b0;
  endtask
  task automatic host_read(input logic [9:0] a, output logic [31:0] d);
    @(negedge clk);
    host_addr = a; host_re = 1'b1;
    @(negedge clk);
    host_re = 1'b0;
    repeat (2) @(negedge clk);
    d = host_rdata;
  endtask
  task automatic check(input string what, input logic [31:0] got, exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s = %h, expected %h", what, got, exp);
    end
  endtask

  // ---------------------------------------------------- mechanism counters
  int n_fwd = 0, n_load_use = 0, n_bypass = 0, n_branch_flush = 0, n_jump = 0;
  int n_if_wait = 0, n_mem_wait = 0, n_mode_switch = 0, n_rf_gated = 0, n_not_taken = 0;
  int n_cycles = 0, last_fetch = -1, fetch_gap_bad = 0, fetch_gap_seen = 0;
  logic prev_crypt = 1'b0, gap_mem_wait = 1'b0;
  always @(posedge clk) if (reset_n && start) begin
    n_cycles++;
    if (dut.idex.ctrl.valid && (dut.fwd_a != 2'b00 || dut.fwd_b != 2'b00)) n_fwd++;
    if (dut.load_use) n_load_use++;
    if (dut.idex.bypass && !dut.memwb_bubble) n_bypass++;
    if (dut.pc_redirect_ex && !dut.mem_wait) n_branch_flush++;
    if (dut.pc_redirect_id && !dut.mem_wait) n_jump++;
    if (dut.idex.ctrl.branch && !dut.ex_taken && !dut.mem_wait) n_not_taken++;
    if (dut.if_wait) n_if_wait++;
    if (dut.mem_wait) n_mem_wait++;
    if (dut.crypt_mode != prev_crypt) n_mode_switch++;
    prev_crypt = dut.crypt_mode;
    if (!dut.u_rf.we) n_rf_gated++;
    // fetch interval of encrypted instructions: IF/ID loads while in crypt mode
    if (dut.crypt_mode && !dut.if_wait && !dut.ifid_hold && !dut.ifid_flush &&
        !dut.pc_redirect_ex && !dut.pc_redirect_id && !dut.load_use && !dut.mem_wait) begin
      if (last_fetch >= 0 && !gap_mem_wait) begin
        fetch_gap_seen++;
        if (n_cycles - last_fetch != 19) begin
          fetch_gap_bad++;
          $display("fetch interval %0d at pc %h", n_cycles - last_fetch, dut.pc);
        end
      end
      last_fetch = n_cycles;
      gap_mem_wait = 1'b0;
    end else if (!dut.crypt_mode) last_fetch = -1;
    if (dut.mem_wait) gap_mem_wait = 1'b1;
  end

  always @(posedge clk) if (reset_n && start && n_cycles < 400 && $test$plusargs("trace")) $display("c%0d pc=%h ifid=%h ifw=%b memw=%b lu=%b byp=%b cm=%b wb=%b r%0d=%h exm=%h", n_cycles, dut.pc, dut.ifid.instr, dut.if_wait, dut.mem_wait, dut.load_use, dut.idex.bypass, dut.crypt_mode, dut.memwb.reg_write, dut.memwb.wr_reg, dut.memwb.wdata, dut.exmem.result);
  logic [31:0] rd_val, ks_data;
  initial begin
    // ---------------- program
    foreach (prog[i]) prog[i] = jtype(OP_J, END_WORD);
    prog[0]  = itype(OP_ADDI, 1, 0, 5);
    prog[1]  = itype(OP_ADDI, 2, 0, 7);
    prog[2]  = rtype(FN_ADD, 3, 1, 2);
    prog[3]  = itype(OP_SW, 3, 0, 0);
    prog[4]  = rtype(FN_SUB, 4, 3, 1);
    prog[5]  = rtype(FN_OR, 5, 4, 2);
    prog[6]  = itype(OP_LW, 6, 0, 0);
    prog[7]  = rtype(FN_ADD, 7, 6, 6);
    prog[8]  = rtype(FN_SLT, 8, 1, 2);
    prog[9]  = rtype(FN_NOR, 9, 0, 0);
    prog[10] = rtype(FN_SLL, 10, 1, 0, 4);
    prog[11] = rtype(FN_SRL, 11, 9, 0, 28);
    prog[12] = itype(OP_ANDI, 12, 9, 16'h00ff);
    prog[13] = itype(OP_ORI, 13, 0, 16'h1234);
    prog[14] = itype(OP_SLTI, 14, 1, -1);
    prog[15] = itype(OP_SUBI, 15, 2, 3);
    prog[16] = itype(OP_NORI, 16, 0, 16'h0f0f);
    prog[17] = itype(OP_BEQ, 1, 1, 2);          // taken: skips 18, 19
    prog[18] = itype(OP_ADDI, 20, 0, 99);
    prog[19] = itype(OP_ADDI, 20, 0, 98);
    prog[20] = itype(OP_BNE, 1, 1, 5);          // not taken
    prog[21] = jtype(OP_JAL, 23);               // $31 = 88
    prog[22] = itype(OP_ADDI, 21, 0, 77);
    prog[23] = itype(OP_ADDI, 22, 0, 1);
    prog[24] = jtype(OP_J, 26);
    prog[25] = itype(OP_ADDI, 21, 0, 66);
    prog[26] = itype(OP_ADDI, 23, 0, 29 * 4);
    prog[27] = rtype(FN_JR, 0, 23, 0);
    prog[28] = itype(OP_ADDI, 21, 0, 55);
    prog[29] = itype(OP_LKLW, 0, 0, 4);         // key word 0 = mem[4]
    prog[30] = itype(OP_LKUW, 0, 0, 8);         // key word 1 = mem[8]
    prog[31] = jtype(OP_CRYPT, 1);              // crypt mode on
    prog[32] = itype(OP_ADDI, 24, 0, 16'h55);   // encrypted from here ...
    prog[33] = itype(OP_SW, 24, 0, 12);
    prog[34] = itype(OP_LW, 25, 0, 12);
    prog[35] = itype(OP_ADDI, 26, 25, 1);
    prog[36] = jtype(OP_CRYPT, 0);              // ... to here
    prog[37] = itype(OP_LW, 27, 0, 12);
    prog[38] = jtype(OP_J, END_WORD);
    for (int w = CRYPT_FIRST; w <= CRYPT_LAST; w++)
      prog[w] ^= keystream(KEY, 8'h01, 32'(4 * w));
    ks_data = keystream(KEY, 8'h02, 32'd12);

    // ---------------- reset mode: load everything through the host port
    repeat (2) @(negedge clk);
    for (int r = 0; r < 32; r++) host_write(10'h200 | 10'(4 * r), 32'd0);
    for (int w = 0; w < 64; w++) host_write(10'h000 | 10'(4 * w), prog[w]);
    for (int w = 0; w < 64; w++) host_write(10'h100 | 10'(4 * w), 32'd0);
    host_write(10'h104, KEY[31:0]);
    host_write(10'h108, KEY[63:32]);
    @(negedge clk);
    check("host readback of data word 8", 32'd0, 32'd0);
    host_read(10'h108, rd_val);
    check("host readback of data word 8", rd_val, KEY[63:32]);

    // ---------------- run
    @(negedge clk);
    reset_n = 1'b1; start = 1'b1;
    wait (dut.ifid.instr == prog[END_WORD]);
    repeat (10) @(negedge clk);
    start = 1'b0;
    $display("program finished after %0d cycles", n_cycles);
    @(negedge clk);
    reset_n = 1'b0;

    // ---------------- read back and compare
    begin
      logic [31:0] exp [32];
      foreach (exp[i]) exp[i] = 32'd0;
      exp[1] = 5; exp[2] = 7; exp[3] = 12; exp[4] = 7; exp[5] = 7; exp[6] = 12;
      exp[7] = 24; exp[8] = 1; exp[9] = 32'hffffffff; exp[10] = 80; exp[11] = 15;
      exp[12] = 255; exp[13] = 32'h1234; exp[14] = 0; exp[15] = 4; exp[16] = 32'hfffff0f0;
      exp[22] = 1; exp[23] = 116; exp[31] = 88;
      exp[24] = 32'h55; exp[25] = 32'h55; exp[26] = 32'h56; exp[27] = 32'h55 ^ ks_data;
      for (int r = 1; r < 32; r++) begin
        host_read(10'h200 | 10'(4 * r), rd_val);
        check($sformatf("$%0d", r), rd_val, exp[r]);
      end
    end
    host_read(10'h100, rd_val);
    check("mem[0]", rd_val, 32'd12);
    host_read(10'h10c, rd_val);
    check("mem[12] (ciphertext)", rd_val, 32'h55 ^ ks_data);
    check("key word 0", dut.keys[31:0], KEY[31:0]);
    check("key word 1", dut.keys[63:32], KEY[63:32]);

    // ---------------- mechanisms
    $display("forwards=%0d load_use=%0d mem_bypass=%0d branch_flush=%0d not_taken=%0d jumps=%0d",
             n_fwd, n_load_use, n_bypass, n_branch_flush, n_not_taken, n_jump);
    $display("if_crypto_wait=%0d mem_crypto_wait=%0d crypt_mode_switches=%0d rf_gated_cycles=%0d",
             n_if_wait, n_mem_wait, n_mode_switch, n_rf_gated);
    $display("encrypted fetch intervals checked=%0d wrong=%0d", fetch_gap_seen, fetch_gap_bad);
    check("forwarding happened", 32'(n_fwd > 0), 1);
    check("load-use wait happened", 32'(n_load_use > 0), 1);
    check("MEM bypass happened", 32'(n_bypass > 0), 1);
    check("branch flush happened", 32'(n_branch_flush > 0), 1);
    check("not-taken branch happened", 32'(n_not_taken > 0), 1);
    check("ID jump happened", 32'(n_jump > 0), 1);
    check("IF crypto wait happened", 32'(n_if_wait > 0), 1);
    check("MEM crypto wait happened", 32'(n_mem_wait > 0), 1);
    check("crypt mode switched on and off", 32'(n_mode_switch >= 2), 1);
    check("register-file clock gated", 32'(n_rf_gated > 0), 1);
    check("encrypted fetches timed", 32'(fetch_gap_seen > 0), 1);
    check("encrypted fetch interval 19", 32'(fetch_gap_bad), 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
