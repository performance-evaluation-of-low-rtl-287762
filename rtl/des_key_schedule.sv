// des_key_schedule: forms the 48-bit subkey of any DES round from the key.
//
// PC-1 selects 56 of the 64 key bits (dropping the parity bits) and splits them
// into 28-bit halves C and D; both are rotated left by the total shift after
// round `round`+1 (1, 2, 4, 6, ... 28 bits); PC-2 picks the 48 subkey bits.
// Computing the rotation from the round number, instead of shifting a register
// round by round, lets a datapath fetch subkeys in any order (decryption uses
// them backwards).  Combinational.
module des_key_schedule (
  input  logic [63:0] key,
  input  logic [3:0]  round,     // 0..15 -> K1..K16
  output logic [47:0] subkey
);
  logic [55:0] cd;
  logic [27:0] c, d;

  function automatic logic [27:0] rotl28(input logic [27:0] v, input int unsigned n);
    return 28'((v << n) | (v >> (28 - n)));
  endfunction

  permutation_unit #(.IN_W(64), .OUT_W(56), .TAB(des_pkg::PC1_T)) u_pc1 (.din(key), .dout(cd));
  always_comb begin
    c = rotl28(cd[55:28], des_pkg::ROT_CUM[round]);
    d = rotl28(cd[27:0],  des_pkg::ROT_CUM[round]);
  end
  permutation_unit #(.IN_W(56), .OUT_W(48), .TAB(des_pkg::PC2_T)) u_pc2 (.din({c, d}), .dout(subkey));
endmodule
