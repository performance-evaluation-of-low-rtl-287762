// mips_crypto_top: 32-bit five-stage MIPS crypto processor.
//
// Pipeline IF - ID - EXE - MEM - WB with a block cipher (DES by default, TDES or
// AES-128 through ALG) used in three places:
//   IF : instruction words may be stored encrypted; a crypto unit deciphers the
//        word at the PC and a MUX chooses it when the crypt mode is on;
//   MEM: with the crypt mode on, SW data pass an encryption unit before the data
//        memory and loaded words pass a decryption unit after it.
// The crypt mode starts from the crypt_enable pin and is changed by CRYPT; keys
// are written into the key register by LKLW/LKUW (or by the host).  Each
// instruction carries the crypt mode it was decoded under.
//
// Hazards: ALU results are forwarded from EXE/MEM and MEM/WB; a load followed by
// a user of its result makes the user wait one cycle; branches and JR resolve in
// EXE and flush the two younger instructions when taken; J, JAL and CRYPT
// redirect from ID (CRYPT re-fetches its successor so that it is read under the
// new mode).  A crypto unit that is still computing stalls its stage.
//
// Low-power MEM bypass: a flag is set when a store, branch, J, JR or CRYPT leaves
// ID and cleared when a load (LW, LKLW, LKUW) does.  An arithmetic instruction
// (R-type, arithmetic immediate, JAL link) decoded while the flag is set skips the
// MEM stage: its EXE result goes straight into MEM/WB and EXE/MEM is loaded with
// zero, so the MEM stage sees no transitions.  The rule guarantees that the
// instruction ahead of it in EXE/MEM never needs MEM/WB in the same cycle.
//
// Modes: reset_n = 0 is reset (load) mode - the pipeline is cleared and the host
// port (io_unit) writes and reads the instruction memory, data memory, registers
// and key words.  reset_n = 1 with start = 1 runs the program from address 0;
// start = 0 freezes the pipeline.  ready is high in each running cycle in which
// the pipeline advanced (no crypto wait, no load-use wait).
//
// The stage organisation, the crypto placement, the instruction set, the key
// register, the MEM bypass and the load mode follow the paper; the opcodes it left
// ambiguous, the word-to-block cipher mapping, the host port encoding and the
// meaning of start/ready are this design's.
module mips_crypto_top
  import mips_pkg::*;
#(
  parameter crypto_alg_e ALG        = ALG_DES,
  parameter int unsigned IMEM_BYTES = 256,
  parameter int unsigned DMEM_BYTES = 256
) (
  input  logic        clk,
  input  logic        reset_n,
  input  logic        start,
  input  logic        crypt_enable,
  output logic        ready,
  input  logic [9:0]  host_addr,
  input  logic [31:0] host_wdata,
  input  logic        host_we,
  input  logic        host_re,
  output logic [31:0] host_rdata
);
  localparam int unsigned IAW = $clog2(IMEM_BYTES);
  localparam int unsigned DAW = $clog2(DMEM_BYTES);

  typedef struct packed {
    logic [31:0] pc4;
    logic [31:0] instr;
  } ifid_t;

  typedef struct packed {
    ctrl_t       ctrl;
    logic [31:0] pc4;
    logic [4:0]  rs, rt, wr_reg;
    logic [31:0] a, b, imm;
    logic [4:0]  shamt;
    logic [2:0]  key_idx;
    logic        bypass;
    logic        crypt_on;
  } idex_t;

  typedef struct packed {
    ctrl_t       ctrl;
    logic [4:0]  wr_reg;
    logic [31:0] result;
    logic [31:0] store_data;
    logic [2:0]  key_idx;
    logic        crypt_on;
  } exmem_t;

  typedef struct packed {
    logic        reg_write;
    logic        key_write;
    logic [4:0]  wr_reg;
    logic [2:0]  key_idx;
    logic [31:0] wdata;
  } memwb_t;

  ifid_t  ifid;
  idex_t  idex, idex_n;
  exmem_t exmem, exmem_n;
  memwb_t memwb, memwb_n;

  logic running;
  assign running = reset_n && start;

  // ---------------------------------------------------------------- host port
  logic [7:0]  io_addr;
  logic [31:0] io_wdata, dmem_rdata, rf_rdata1, rf_rdata2;
  logic        io_imem_we, io_dmem_we, io_reg_we, io_key_we, io_active;

  io_unit u_io (
    .clk, .reset_n, .host_addr, .host_wdata, .host_we, .host_re, .host_rdata,
    .addr(io_addr), .wdata(io_wdata), .imem_we(io_imem_we), .dmem_we(io_dmem_we),
    .reg_we(io_reg_we), .key_we(io_key_we), .active(io_active),
    .dmem_rdata(dmem_rdata), .reg_rdata(rf_rdata1));

  // ------------------------------------------------------------ hazard control
  logic load_use, pc_hold, pc_redirect_ex, pc_redirect_id, ifid_hold, ifid_flush;
  logic idex_hold, idex_flush, exmem_hold, memwb_bubble, id_advance;
  logic if_wait, mem_wait, ex_redirect, id_jump;
  logic [31:0] ex_target, id_target;
  ctrl_t id_ctrl;

  hazard_unit u_hz (
    .running, .if_wait, .mem_wait, .ex_redirect, .id_jump,
    .id_valid(id_ctrl.valid), .id_rs(ifid.instr[25:21]), .id_rt(ifid.instr[20:16]),
    .id_uses_rs(id_ctrl.uses_rs), .id_uses_rt(id_ctrl.uses_rt),
    .ex_mem_read(idex.ctrl.mem_read), .ex_rd(idex.wr_reg),
    .load_use, .pc_hold, .pc_redirect_ex, .pc_redirect_id, .ifid_hold, .ifid_flush,
    .idex_hold, .idex_flush, .exmem_hold, .memwb_bubble, .id_advance);

  assign ready = running && !mem_wait && !load_use && !if_wait;

  // ---------------------------------------------------------------------- keys
  logic [191:0] keys;
  logic         key_wr;
  logic         key_we;
  logic [2:0]   key_waddr;
  assign key_we    = io_active ? io_key_we : memwb.key_write;
  assign key_waddr = io_active ? io_addr[4:2] : memwb.key_idx;

  key_register #(.NWORDS(6)) u_key (
    .clk, .we(key_we), .waddr(key_waddr), .wdata(io_active ? io_wdata : memwb.wdata),
    .keys, .wr(key_wr));

  // ------------------------------------------------------------------------ IF
  logic [31:0] pc, pc_plus4, imem_rdata, if_plain, if_instr;
  logic        crypt_mode, if_ready;

  program_counter u_pc (
    .clk, .rst_n(reset_n), .hold(pc_hold),
    .redirect(pc_redirect_ex || pc_redirect_id),
    .target(pc_redirect_ex ? ex_target : id_target), .pc, .pc_plus4);

  instr_mem #(.BYTES(IMEM_BYTES)) u_imem (
    .clk, .we(io_imem_we), .waddr(io_addr[IAW-1:0]), .wdata(io_wdata),
    .raddr(pc[IAW-1:0]), .rdata(imem_rdata));

  crypto_unit #(.ALG(ALG), .DOMAIN(8'h01)) u_if_dec (
    .clk, .rst_n(reset_n), .req(running && crypt_mode), .addr(pc), .keys, .key_wr,
    .din(imem_rdata), .dout(if_plain), .ready(if_ready));

  assign if_wait  = crypt_mode && !if_ready;
  assign if_instr = crypt_mode ? if_plain : imem_rdata;   // fetch MUX

  always_ff @(posedge clk or negedge reset_n) begin
    if (!reset_n)        ifid <= '0;
    else if (ifid_hold)  ifid <= ifid;
    else if (ifid_flush) ifid <= '0;
    else                 ifid <= '{pc4: pc_plus4, instr: if_instr};
  end

  // ------------------------------------------------------------------------ ID
  logic [31:0] id_imm;
  logic [4:0]  id_rs, id_rt, id_rd;
  logic        bypass_mode;

  control_unit  u_ctrl (.instr(ifid.instr), .ctrl(id_ctrl));
  assign id_rs = ifid.instr[25:21];
  assign id_rt = ifid.instr[20:16];
  assign id_rd = ifid.instr[15:11];

  register_file #(.NREG(32)) u_rf (
    .clk, .we(io_active ? io_reg_we : memwb.reg_write),
    .waddr(io_active ? io_addr[6:2] : memwb.wr_reg),
    .wdata(io_active ? io_wdata : memwb.wdata),
    .raddr1(io_active ? io_addr[6:2] : id_rs), .raddr2(id_rt),
    .rdata1(rf_rdata1), .rdata2(rf_rdata2));

  sign_extender u_sext (.imm(ifid.instr[15:0]), .zero_ext(id_ctrl.zero_ext), .y(id_imm));

  assign id_jump   = id_ctrl.jump || id_ctrl.crypt;
  assign id_target = id_ctrl.crypt ? ifid.pc4 : {ifid.pc4[31:28], ifid.instr[25:0], 2'b00};

  always_comb begin
    idex_n.ctrl     = id_ctrl;
    idex_n.pc4      = ifid.pc4;
    idex_n.rs       = id_rs;
    idex_n.rt       = id_rt;
    idex_n.wr_reg   = id_ctrl.link ? 5'd31 : (id_ctrl.dst_rt ? id_rt : id_rd);
    idex_n.a        = rf_rdata1;
    idex_n.b        = rf_rdata2;
    idex_n.imm      = id_imm;
    idex_n.shamt    = ifid.instr[10:6];
    idex_n.key_idx  = {id_rt[1:0], id_ctrl.key_upper};
    idex_n.bypass   = bypass_mode && id_ctrl.arith;
    idex_n.crypt_on = crypt_mode;
  end

  // crypt mode and MEM-bypass mode are updated when an instruction leaves ID
  always_ff @(posedge clk or negedge reset_n) begin
    if (!reset_n) begin
      crypt_mode  <= crypt_enable;
      bypass_mode <= 1'b0;
    end else if (id_advance) begin
      if (id_ctrl.crypt) crypt_mode <= |ifid.instr[25:0];
      if (id_ctrl.mem_write || id_ctrl.branch || id_ctrl.jr || id_ctrl.crypt ||
          (id_ctrl.jump && !id_ctrl.link))
        bypass_mode <= 1'b1;
      else if (id_ctrl.mem_read)
        bypass_mode <= 1'b0;
    end
  end

  always_ff @(posedge clk or negedge reset_n) begin
    if (!reset_n)        idex <= '0;
    else if (idex_hold)  idex <= idex;
    else if (idex_flush) idex <= '0;
    else                 idex <= idex_n;
  end

  // ----------------------------------------------------------------------- EXE
  logic [1:0]  fwd_a, fwd_b;
  logic [31:0] ex_a, ex_b, alu_y, ex_result;
  logic        alu_zero, ex_taken;

  forwarding_unit u_fwd (
    .rs(idex.rs), .rt(idex.rt),
    .exmem_wr(exmem.ctrl.reg_write), .exmem_rd(exmem.wr_reg),
    .memwb_wr(memwb.reg_write), .memwb_rd(memwb.wr_reg),
    .fwd_a, .fwd_b);

  always_comb begin
    unique case (fwd_a)
      2'b10:   ex_a = exmem.result;
      2'b01:   ex_a = memwb.wdata;
      default: ex_a = idex.a;
    endcase
    unique case (fwd_b)
      2'b10:   ex_b = exmem.result;
      2'b01:   ex_b = memwb.wdata;
      default: ex_b = idex.b;
    endcase
  end

  alu #(.W(32)) u_alu (
    .op(idex.ctrl.alu_op), .a(ex_a), .b(idex.ctrl.alu_imm ? idex.imm : ex_b),
    .shamt(idex.shamt), .y(alu_y), .zero(alu_zero));

  assign ex_result   = idex.ctrl.link ? idex.pc4 : alu_y;
  assign ex_taken    = idex.ctrl.branch && ((ex_a == ex_b) != idex.ctrl.branch_ne);
  assign ex_redirect = ex_taken || idex.ctrl.jr;
  assign ex_target   = idex.ctrl.jr ? ex_a : idex.pc4 + {idex.imm[29:0], 2'b00};

  always_comb begin
    exmem_n.ctrl       = idex.ctrl;
    exmem_n.wr_reg     = idex.wr_reg;
    exmem_n.result     = ex_result;
    exmem_n.store_data = ex_b;
    exmem_n.key_idx    = idex.key_idx;
    exmem_n.crypt_on   = idex.crypt_on;
  end

  always_ff @(posedge clk or negedge reset_n) begin
    if (!reset_n)         exmem <= '0;
    else if (exmem_hold)  exmem <= exmem;
    else if (idex.bypass) exmem <= '0;      // MEM stage kept quiet
    else                  exmem <= exmem_n;
  end

  // ----------------------------------------------------------------------- MEM
  logic [31:0] mem_addr, enc_data, dec_data, load_data;
  logic        enc_req, dec_req, enc_ready, dec_ready;

  assign mem_addr = {24'd0, exmem.result[7:2], 2'b00};
  assign enc_req  = running && exmem.ctrl.mem_write && exmem.crypt_on;
  assign dec_req  = running && exmem.ctrl.mem_read && exmem.crypt_on;
  assign mem_wait = (enc_req && !enc_ready) || (dec_req && !dec_ready);

  crypto_unit #(.ALG(ALG), .DOMAIN(8'h02)) u_mem_enc (
    .clk, .rst_n(reset_n), .req(enc_req), .addr(mem_addr), .keys, .key_wr,
    .din(exmem.store_data), .dout(enc_data), .ready(enc_ready));

  data_mem #(.BYTES(DMEM_BYTES)) u_dmem (
    .clk,
    .we(io_active ? io_dmem_we : (running && exmem.ctrl.mem_write && !mem_wait)),
    .addr(io_active ? io_addr[DAW-1:0] : exmem.result[DAW-1:0]),
    .wdata(io_active ? io_wdata : (exmem.crypt_on ? enc_data : exmem.store_data)),
    .rdata(dmem_rdata));

  crypto_unit #(.ALG(ALG), .DOMAIN(8'h02)) u_mem_dec (
    .clk, .rst_n(reset_n), .req(dec_req), .addr(mem_addr), .keys, .key_wr,
    .din(dmem_rdata), .dout(dec_data), .ready(dec_ready));

  assign load_data = exmem.crypt_on ? dec_data : dmem_rdata;   // DEMUX / MUX

  always_comb begin
    if (idex.bypass) begin
      memwb_n = '{reg_write: idex.ctrl.reg_write, key_write: 1'b0, wr_reg: idex.wr_reg,
                  key_idx: '0, wdata: ex_result};
    end else begin
      memwb_n = '{reg_write: exmem.ctrl.reg_write, key_write: exmem.ctrl.key_write,
                  wr_reg: exmem.wr_reg, key_idx: exmem.key_idx,
                  wdata: exmem.ctrl.mem_read ? load_data : exmem.result};
    end
  end

  always_ff @(posedge clk or negedge reset_n) begin
    if (!reset_n)          memwb <= '0;
    else if (memwb_bubble) memwb <= '0;
    else                   memwb <= memwb_n;
  end

  // A bypassed instruction must never meet a writing instruction in EXE/MEM.
  bypass_no_conflict: assert property (@(posedge clk) disable iff (!reset_n)
    (running && !memwb_bubble && idex.bypass) |-> !(exmem.ctrl.reg_write || exmem.ctrl.key_write));

endmodule
