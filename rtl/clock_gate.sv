// clock_gate: latch-based integrated clock gate.
//
// The enable is captured by a latch that is transparent while clk is low, so it
// is stable during the high phase and gclk = clk & en_latched has no glitches.
// gclk pulses only in cycles whose enable was high at the rising edge; registers
// clocked by it do not toggle otherwise, which is how the register file, the
// memories and the key register save switching power.  A synthesis flow would map
// this onto the cell library's clock-gating cell.
module clock_gate (
  input  logic clk,
  input  logic en,
  output logic gclk
);
  logic en_l;
  always_latch begin
    if (!clk) en_l = en;
  end
  assign gclk = clk & en_l;
endmodule
