// data_mem: the data RAM of the MEM stage - BYTES bytes as 32-bit words.
//
// One port: combinational read at addr, write of wdata at the rising edge when we
// is high (word aligned, addr[1:0] ignored).  The write clock is gated by we.  In
// reset mode the same port is driven by the host port.
module data_mem #(
  parameter int unsigned BYTES = 256
) (
  input  logic                       clk,
  input  logic                       we,
  input  logic [$clog2(BYTES)-1:0]   addr,
  input  logic [31:0]                wdata,
  output logic [31:0]                rdata
);
  localparam int unsigned WORDS = BYTES / 4;
  logic [31:0] mem [WORDS];
  logic        gclk;

  clock_gate u_cg (.clk(clk), .en(we), .gclk(gclk));

  always_ff @(posedge gclk) begin
    mem[addr[$clog2(BYTES)-1:2]] <= wdata;
  end
  assign rdata = mem[addr[$clog2(BYTES)-1:2]];
endmodule
