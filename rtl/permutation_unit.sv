// permutation_unit: a fixed bit permutation / selection network.
//
// Output bit k (k = 1..OUT_W, bit 1 = MSB) is input bit TAB[k-1] (bit 1 = MSB),
// the way the DES standard writes its tables.  OUT_W may be smaller (PC-1, PC-2)
// or larger (expansion E) than IN_W.  Pure wiring, no logic and no delay.  The
// DES datapaths instantiate it for IP, IP^-1, E, P, PC-1 and PC-2; the default
// table is the initial permutation IP.
module permutation_unit #(
  parameter int unsigned IN_W = 64,
  parameter int unsigned OUT_W = 64,
  parameter int unsigned TAB [OUT_W] = des_pkg::IP_T
) (
  input  logic [IN_W-1:0]  din,
  output logic [OUT_W-1:0] dout
);
  for (genvar k = 0; k < OUT_W; k++) begin : g_bit
    assign dout[OUT_W-1-k] = din[IN_W-TAB[k]];
  end
endmodule
