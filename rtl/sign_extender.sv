// sign_extender: widens the 16-bit immediate of an I-type instruction to 32 bits.
//
// With zero_ext low the immediate is sign-extended (effective addresses, ADDI,
// SUBI, SLTI, branch offsets); with zero_ext high it is zero-extended, which this
// design uses for the logical immediates ANDI, ORI and NORI.  Combinational.
module sign_extender (
  input  logic [15:0] imm,
  input  logic        zero_ext,
  output logic [31:0] y
);
  assign y = {{16{imm[15] & ~zero_ext}}, imm};
endmodule
