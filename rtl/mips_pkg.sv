// mips_pkg: instruction encodings, ALU operations and the decoded control word of
// the MIPS crypto processor, shared by the control unit, the ALU and the pipeline.
//
// Instruction formats are the classic MIPS ones: op[31:26], rs[25:21], rt[20:16],
// rd[15:11], shamt[10:6], funct[5:0]; imm[15:0]; target[25:0].  The load, store,
// key-load and CRYPT opcodes follow the binary codes of the ISA table
// (LW 100011, SW 101011, LKLW 111100, LKUW 111110, CRYPT 111111).  That table
// gives one opcode to several instructions (all immediates 001000, all jumps
// 000010, both branches 000100); the instructions that share a code with ADDI, J or
// BEQ take the standard MIPS code or an unused one here (see OP_* below).
package mips_pkg;

  typedef enum logic [5:0] {
    OP_RTYPE = 6'b000000,
    OP_J     = 6'b000010,
    OP_JAL   = 6'b000011,
    OP_BEQ   = 6'b000100,
    OP_BNE   = 6'b000101,
    OP_ADDI  = 6'b001000,
    OP_SUBI  = 6'b001001,
    OP_SLTI  = 6'b001010,
    OP_ANDI  = 6'b001100,
    OP_ORI   = 6'b001101,
    OP_NORI  = 6'b001110,
    OP_LW    = 6'b100011,
    OP_SW    = 6'b101011,
    OP_LKLW  = 6'b111100,
    OP_LKUW  = 6'b111110,
    OP_CRYPT = 6'b111111
  } opcode_e;

  typedef enum logic [5:0] {
    FN_SLL = 6'h00,
    FN_SRL = 6'h02,
    FN_JR  = 6'h08,
    FN_ADD = 6'h20,
    FN_SUB = 6'h22,
    FN_AND = 6'h24,
    FN_OR  = 6'h25,
    FN_NOR = 6'h27,
    FN_SLT = 6'h2a
  } funct_e;

  typedef enum logic [3:0] {
    ALU_NOP, ALU_ADD, ALU_SUB, ALU_AND, ALU_OR, ALU_NOR, ALU_SLT, ALU_SLL, ALU_SRL
  } alu_op_e;

  // Which block cipher the crypto units are built around.
  typedef enum logic [1:0] { ALG_DES, ALG_TDES, ALG_AES } crypto_alg_e;

  // Decoded controls of one instruction.
  typedef struct packed {
    logic    valid;      // a real instruction (0 = bubble / NOP)
    logic    reg_write;  // writes a GPR in write-back
    logic    dst_rt;     // destination is rt (I-type) instead of rd
    logic    alu_imm;    // ALU operand B is the extended immediate
    logic    zero_ext;   // immediate is zero-extended (logical immediates)
    logic    mem_read;   // LW, LKLW, LKUW
    logic    mem_write;  // SW
    logic    key_write;  // LKLW, LKUW: write-back goes to the key register
    logic    key_upper;  // LKUW
    logic    branch;     // BEQ / BNE
    logic    branch_ne;  // BNE
    logic    jump;       // J, JAL (resolved in ID)
    logic    link;       // JAL: write PC+4 to $31
    logic    jr;         // JR (resolved in EXE)
    logic    crypt;      // CRYPT: change the crypt mode
    logic    arith;      // R-type / immediate arithmetic: may bypass MEM
    logic    uses_rs;
    logic    uses_rt;
    alu_op_e alu_op;
  } ctrl_t;


endpackage
