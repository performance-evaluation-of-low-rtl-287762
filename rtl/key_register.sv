// key_register: the cipher key store of the ID stage.
//
// NWORDS 32-bit words, written one at a time from the write-back stage by the
// key-load instructions (LKLW writes the lower, LKUW the upper word of 64-bit key
// slot rt, i.e. word 2*rt or 2*rt+1) or by the host port in reset mode.  keys
// presents all words at once, word 0 in the least significant bits: slot s is
// {word 2s+1, word 2s}.  wr pulses with every write so that the crypto units can
// drop keystream computed under the old key.  The words keep their value for the
// whole program.  Writes go through a clock gate.
module key_register #(
  parameter int unsigned NWORDS = 6
) (
  input  logic                        clk,
  input  logic                        we,
  input  logic [$clog2(NWORDS)-1:0]   waddr,
  input  logic [31:0]                 wdata,
  output logic [32*NWORDS-1:0]        keys,
  output logic                        wr
);
  logic [31:0] words [NWORDS];
  logic        gclk;

  clock_gate u_cg (.clk(clk), .en(we), .gclk(gclk));

  always_ff @(posedge gclk) begin
    if (32'(waddr) < NWORDS) words[waddr] <= wdata;
  end

  for (genvar i = 0; i < NWORDS; i++) begin : g_out
    assign keys[32*i +: 32] = words[i];
  end
  assign wr = we;
endmodule
