// forwarding_unit: operand bypass selection for the EXE stage.
//
// For each source register of the instruction in EXE (rs, rt) it picks the
// newest value: the result waiting in EXE/MEM (select 2'b10), else the value in
// MEM/WB (2'b01), else the register-file value read in ID (2'b00).  Register $0
// is never forwarded.  Combinational.  Together with the hazard unit this is the
// dependency resolver of the processor.
module forwarding_unit (
  input  logic [4:0] rs,
  input  logic [4:0] rt,
  input  logic       exmem_wr,
  input  logic [4:0] exmem_rd,
  input  logic       memwb_wr,
  input  logic [4:0] memwb_rd,
  output logic [1:0] fwd_a,
  output logic [1:0] fwd_b
);
  function automatic logic [1:0] sel(input logic [4:0] r);
    if (exmem_wr && exmem_rd != 5'd0 && exmem_rd == r)      return 2'b10;
    else if (memwb_wr && memwb_rd != 5'd0 && memwb_rd == r) return 2'b01;
    else                                                    return 2'b00;
  endfunction
  assign fwd_a = sel(rs);
  assign fwd_b = sel(rt);
endmodule
