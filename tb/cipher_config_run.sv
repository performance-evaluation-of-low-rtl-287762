// cipher_config_run: runs one encrypted program on a mips_crypto_top built with
// the block cipher ALG and checks the result; used by tb_cipher_configs.
//
// In reset mode the host port loads the program and six key words into the data
// memory.  The program loads all six words into the key register with
// LKLW/LKUW (three 64-bit slots: TDES K1, K2, K3; AES-128 uses words 0-3),
// switches the crypt mode on, runs seven encrypted instructions (an encrypted
// store, a decrypting load, an add that uses the loaded value, CRYPT 0) and finally reads
// the stored ciphertext with a plain load.  Encrypted instruction words and the
// expected ciphertext are computed with the reference models (TDES from three
// calls of the DES model, E-D-E; AES from aes_model_pkg).  Afterwards the host
// reads the registers and the data word back.  The interval between encrypted
// fetches is checked against the cipher's latency: 16 + 3 = 19 clocks for TDES,
// 40 + 3 = 43 for AES.  done rises when the run is over; checks and failures are
// the counts so far.
module cipher_config_run
  import mips_pkg::*;
#(
  parameter crypto_alg_e ALG = ALG_TDES
) (
  output logic done,
  output int   checks,
  output int   failures
);
  logic        clk = 1'b0, reset_n = 1'b0, start = 1'b0, crypt_enable = 1'b0;
  logic        ready, host_we = 1'b0, host_re = 1'b0;
  logic [9:0]  host_addr = '0;
  logic [31:0] host_wdata = '0, host_rdata;

  mips_crypto_top #(.ALG(ALG)) dut (.clk, .reset_n, .start, .crypt_enable, .ready,
      .host_addr, .host_wdata, .host_we, .host_re, .host_rdata);
  always #5 clk = ~clk;

  localparam int INTERVAL = (ALG == ALG_AES) ? 43 : 19;
  localparam int END_WORD = 16;
  localparam logic [63:0]  K1  = 64'h0123456789ABCDEF, K2 = 64'h23456789ABCDEF01,
                           K3  = 64'h456789ABCDEF0123;
  localparam logic [127:0] AES_KEY = 128'h2b7e151628aed2a6abf7158809cf4f3c;
  logic [31:0] kw [6];

  function automatic logic [31:0] itype(opcode_e op, int rt, int rs, int imm);
    return {op, 5'(rs), 5'(rt), 16'(imm)};
  endfunction
  function automatic logic [31:0] rtype(funct_e fn, int rd, int rs, int rt);
    return {OP_RTYPE, 5'(rs), 5'(rt), 5'(rd), 5'd0, fn};
  endfunction
  function automatic logic [31:0] ks(input logic [7:0] domain, input logic [31:0] addr);
    logic [63:0] b;
    if (ALG == ALG_AES) return aes_model_pkg::keystream(AES_KEY, domain, addr);
    b = des_model_pkg::des(K1, {24'd0, domain, addr}, 1'b0);
    b = des_model_pkg::des(K2, b, 1'b1);
    b = des_model_pkg::des(K3, b, 1'b0);
    return b[31:0];
  endfunction

  task automatic check(input string what, input logic [31:0] got, exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL [%s] %s = %h, expected %h", ALG.name(), what, got, exp);
    end
  endtask
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

  // encrypted fetch interval and mechanism counters
  int n_cycles = 0, last_fetch = -1, gap_seen = 0, gap_bad = 0, n_if_wait = 0, n_mem_wait = 0;
  int n_mode_switch = 0;
  logic gap_mem_wait = 1'b0, prev_crypt = 1'b0;
  always @(posedge clk) if (reset_n && start) begin
    n_cycles++;
    if (dut.if_wait) n_if_wait++;
    if (dut.mem_wait) n_mem_wait++;
    if (dut.crypt_mode != prev_crypt) n_mode_switch++;
    prev_crypt = dut.crypt_mode;
    if (dut.crypt_mode && !dut.if_wait && !dut.ifid_hold && !dut.ifid_flush &&
        !dut.pc_redirect_ex && !dut.pc_redirect_id && !dut.load_use && !dut.mem_wait) begin
      if (last_fetch >= 0 && !gap_mem_wait) begin
        gap_seen++;
        if (n_cycles - last_fetch != INTERVAL) begin
          gap_bad++;
          $display("[%s] fetch interval %0d at pc %h", ALG.name(), n_cycles - last_fetch, dut.pc);
        end
      end
      last_fetch = n_cycles;
      gap_mem_wait = 1'b0;
    end else if (!dut.crypt_mode) last_fetch = -1;
    if (dut.mem_wait) gap_mem_wait = 1'b1;
  end

  logic [31:0] prog [64], rd_val, ks_data;
  initial begin
    done = 1'b0; checks = 0; failures = 0;
    if (ALG == ALG_AES) for (int i = 0; i < 4; i++) kw[i] = AES_KEY[32*i +: 32];
    else begin
      kw[0] = K1[31:0]; kw[1] = K1[63:32]; kw[2] = K2[31:0];
      kw[3] = K2[63:32]; kw[4] = K3[31:0]; kw[5] = K3[63:32];
    end
    if (ALG == ALG_AES) begin
      kw[4] = 32'h0; kw[5] = 32'h0;
      // the reference model itself, against the FIPS-197 example
      check("AES model against FIPS-197 C.1",
            32'(aes_model_pkg::aes128(128'h000102030405060708090a0b0c0d0e0f,
                                  128'h00112233445566778899aabbccddeeff)
              == 128'h69c4e0d86a7b0430d8cdb78070b4c55a), 1);
    end

    foreach (prog[i]) prog[i] = {OP_J, 26'(END_WORD)};
    prog[0]  = itype(OP_ADDI, 1, 0, 'h11);
    prog[1]  = itype(OP_LKLW, 0, 0, 16);
    prog[2]  = itype(OP_LKUW, 0, 0, 20);
    prog[3]  = itype(OP_LKLW, 1, 0, 24);
    prog[4]  = itype(OP_LKUW, 1, 0, 28);
    prog[5]  = itype(OP_LKLW, 2, 0, 32);
    prog[6]  = itype(OP_LKUW, 2, 0, 36);
    prog[7]  = {OP_CRYPT, 26'd1};
    prog[8]  = itype(OP_ADDI, 2, 1, 'h100);   // encrypted from here ...
    prog[9]  = itype(OP_SW, 2, 0, 4);
    prog[10] = itype(OP_LW, 3, 0, 4);
    prog[11] = rtype(FN_ADD, 4, 3, 1);
    prog[12] = itype(OP_ADDI, 5, 0, 1);
    prog[13] = itype(OP_ADDI, 6, 0, 2);
    prog[14] = {OP_CRYPT, 26'd0};               // ... to here
    prog[15] = itype(OP_LW, 7, 0, 4);
    for (int w = 8; w <= 14; w++) prog[w] ^= ks(8'h01, 32'(4 * w));
    ks_data = ks(8'h02, 32'd4);

    repeat (2) @(negedge clk);
    for (int r = 0; r < 32; r++) host_write(10'h200 | 10'(4 * r), 32'd0);
    for (int w = 0; w < 64; w++) host_write(10'h000 | 10'(4 * w), prog[w]);
    for (int w = 0; w < 64; w++) host_write(10'h100 | 10'(4 * w), 32'd0);
    for (int i = 0; i < 6; i++) host_write(10'h110 + 10'(4 * i), kw[i]);
    @(negedge clk);

    reset_n = 1'b1; start = 1'b1;
    wait (dut.ifid.instr == prog[END_WORD]);
    repeat (10) @(negedge clk);
    start = 1'b0;
    $display("[%s] program finished after %0d cycles", ALG.name(), n_cycles);
    @(negedge clk);
    reset_n = 1'b0;

    begin
      logic [31:0] exp [8];
      exp = '{0, 32'h11, 32'h111, 32'h111, 32'h122, 1, 2, 32'h111 ^ ks_data};
      for (int r = 1; r < 8; r++) begin
        host_read(10'h200 | 10'(4 * r), rd_val);
        check($sformatf("$%0d", r), rd_val, exp[r]);
      end
    end
    host_read(10'h104, rd_val);
    check("mem[4] (ciphertext)", rd_val, 32'h111 ^ ks_data);
    for (int i = 0; i < 6; i++) check($sformatf("key word %0d", i), dut.keys[32*i +: 32], kw[i]);
    $display("[%s] if_crypto_wait=%0d mem_crypto_wait=%0d mode_switches=%0d fetch intervals checked=%0d wrong=%0d",
             ALG.name(), n_if_wait, n_mem_wait, n_mode_switch, gap_seen, gap_bad);
    check("IF crypto wait happened", 32'(n_if_wait > 0), 1);
    check("MEM crypto wait happened", 32'(n_mem_wait > 0), 1);
    check("crypt mode switched on and off", 32'(n_mode_switch >= 2), 1);
    check("encrypted fetches timed", 32'(gap_seen > 0), 1);
    check($sformatf("encrypted fetch interval %0d", INTERVAL), 32'(gap_bad), 0);
    done = 1'b1;
  end
endmodule
