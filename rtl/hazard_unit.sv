// hazard_unit: stall and flush decisions of the pipeline (hazard detector).
//
// Inputs describe the instructions in ID and EXE, the control transfers found
// this cycle and whether a crypto unit is still computing.  In priority order:
//   * not running               - everything holds;
//   * MEM crypto wait           - PC, IF/ID, ID/EXE, EXE/MEM hold, MEM/WB gets a
//                                 bubble (a load or store waits for its keystream);
//   * taken branch / JR in EXE  - PC takes the EXE target, IF/ID and ID/EXE are
//                                 flushed (predict not taken, flush on mispredict);
//   * load-use                  - the instruction in ID waits one cycle: PC and
//                                 IF/ID hold, ID/EXE gets a bubble;
//   * J / JAL / CRYPT in ID     - PC takes the ID target, IF/ID is flushed;
//   * IF crypto wait            - PC holds, IF/ID gets a bubble.
// Combinational.  id_advance tells that the instruction in ID moves on this
// cycle, which is when it may update the crypt mode and the MEM-bypass flag.
module hazard_unit (
  input  logic       running,
  input  logic       if_wait,
  input  logic       mem_wait,
  input  logic       ex_redirect,
  input  logic       id_jump,
  input  logic       id_valid,
  input  logic [4:0] id_rs,
  input  logic [4:0] id_rt,
  input  logic       id_uses_rs,
  input  logic       id_uses_rt,
  input  logic       ex_mem_read,
  input  logic [4:0] ex_rd,
  output logic       load_use,
  output logic       pc_hold,
  output logic       pc_redirect_ex,
  output logic       pc_redirect_id,
  output logic       ifid_hold,
  output logic       ifid_flush,
  output logic       idex_hold,
  output logic       idex_flush,
  output logic       exmem_hold,
  output logic       memwb_bubble,
  output logic       id_advance
);
  always_comb begin
    load_use = ex_mem_read && ex_rd != 5'd0 && id_valid &&
               ((id_uses_rs && id_rs == ex_rd) || (id_uses_rt && id_rt == ex_rd));
    pc_hold = 1'b0; pc_redirect_ex = 1'b0; pc_redirect_id = 1'b0;
    ifid_hold = 1'b0; ifid_flush = 1'b0; idex_hold = 1'b0; idex_flush = 1'b0;
    exmem_hold = 1'b0; memwb_bubble = 1'b0; id_advance = 1'b0;
    if (!running) begin
      pc_hold = 1'b1; ifid_hold = 1'b1; idex_hold = 1'b1; exmem_hold = 1'b1;
      memwb_bubble = 1'b1;
    end else if (mem_wait) begin
      pc_hold = 1'b1; ifid_hold = 1'b1; idex_hold = 1'b1; exmem_hold = 1'b1;
      memwb_bubble = 1'b1;
    end else if (ex_redirect) begin
      pc_redirect_ex = 1'b1; ifid_flush = 1'b1; idex_flush = 1'b1;
    end else if (load_use) begin
      pc_hold = 1'b1; ifid_hold = 1'b1; idex_flush = 1'b1;
    end else begin
      id_advance = id_valid;
      if (id_jump) begin
        pc_redirect_id = 1'b1; ifid_flush = 1'b1;
      end else if (if_wait) begin
        pc_hold = 1'b1; ifid_flush = 1'b1;
      end
    end
  end
endmodule
