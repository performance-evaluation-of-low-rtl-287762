// register_file: the 32 x 32-bit general-purpose registers of the ID stage.
//
// Two combinational read ports serve rs and rt; one write port is written by the
// write-back stage on the rising clock edge.  Register $0 always reads zero.  A
// read of the register being written in the same cycle returns the new value
// (write-through), so an instruction in ID sees a result retiring in WB without
// forwarding.  The write clock passes through a clock gate enabled only by we,
// so the array does not toggle in cycles without a write.
module register_file #(
  parameter int unsigned NREG = 32
) (
  input  logic                     clk,
  input  logic                     we,
  input  logic [$clog2(NREG)-1:0]  waddr,
  input  logic [31:0]              wdata,
  input  logic [$clog2(NREG)-1:0]  raddr1,
  input  logic [$clog2(NREG)-1:0]  raddr2,
  output logic [31:0]              rdata1,
  output logic [31:0]              rdata2
);
  logic [31:0] regs [NREG];
  logic        gclk;

  clock_gate u_cg (.clk(clk), .en(we), .gclk(gclk));

  always_ff @(posedge gclk) begin
    regs[waddr] <= wdata;
  end

  function automatic logic [31:0] rd(input logic [$clog2(NREG)-1:0] a);
    if (a == '0)              return '0;
    else if (we && a == waddr) return wdata;
    else                      return regs[a];
  endfunction

  assign rdata1 = rd(raddr1);
  assign rdata2 = rd(raddr2);
endmodule
