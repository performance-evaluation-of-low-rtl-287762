// des_f: the DES cipher function f(R, K) of one round.
//
// The 32-bit right half is expanded to 48 bits (E), XORed with the 48-bit round
// subkey, split into eight 6-bit groups that address the S-boxes S1..S8 (each
// giving 4 bits), and the 32-bit S-box output is permuted by P.  Purely
// combinational; the structure is the round detail of the paper, the tables are
// those of the DES standard.
module des_f (
  input  logic [31:0] r,
  input  logic [47:0] k,
  output logic [31:0] f
);
  logic [47:0] e, x;
  logic [31:0] s;

  permutation_unit #(.IN_W(32), .OUT_W(48), .TAB(des_pkg::E_T)) u_e (.din(r), .dout(e));
  assign x = e ^ k;
  for (genvar i = 0; i < 8; i++) begin : g_sbox
    assign s[31-4*i -: 4] = des_pkg::sbox(i, x[47-6*i -: 6]);
  end
  permutation_unit #(.IN_W(32), .OUT_W(32), .TAB(des_pkg::P_T)) u_p (.din(s), .dout(f));
endmodule
