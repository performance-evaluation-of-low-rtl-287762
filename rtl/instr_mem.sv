// instr_mem: the instruction memory (ROM of the processor) - BYTES bytes as
// 32-bit words addressed by byte address (bits [1:0] ignored).
//
// Read is combinational from the PC.  The program cannot write it; the host
// port loads it while the processor is in reset mode (we, waddr, wdata), through
// a clock-gated write port.  Holds plain or encrypted instruction words.
module instr_mem #(
  parameter int unsigned BYTES = 256
) (
  input  logic                       clk,
  input  logic                       we,
  input  logic [$clog2(BYTES)-1:0]   waddr,
  input  logic [31:0]                wdata,
  input  logic [$clog2(BYTES)-1:0]   raddr,
  output logic [31:0]                rdata
);
  localparam int unsigned WORDS = BYTES / 4;
  logic [31:0] mem [WORDS];
  logic        gclk;

  clock_gate u_cg (.clk(clk), .en(we), .gclk(gclk));

  always_ff @(posedge gclk) begin
    mem[waddr[$clog2(BYTES)-1:2]] <= wdata;
  end
  assign rdata = mem[raddr[$clog2(BYTES)-1:2]];
endmodule
