// aes_model_pkg: behavioural AES-128 encryption used as the reference for the
// processor tests.  Written independently of the RTL: the S-box is computed from
// its definition (multiplicative inverse in GF(2^8) modulo x^8+x^4+x^3+x+1,
// followed by the affine map with constant 0x63), the state is a byte array in
// FIPS 197 order (byte 0 = most significant byte of the block) and the key
// schedule is expanded in full before the rounds.  keystream() gives the 32-bit
// word the processor's crypto units XOR onto a word in the AES configuration:
// the low 32 bits of AES_K({88'b0, domain, byte address}).
package aes_model_pkg;

  function automatic logic [7:0] gmul(input logic [7:0] a, input logic [7:0] b);
    logic [7:0] r = 8'd0;
    for (int i = 0; i < 8; i++) begin
      if (b[i]) r ^= a;
      a = a[7] ? ((a << 1) ^ 8'h1b) : (a << 1);
    end
    return r;
  endfunction

  function automatic logic [7:0] sbox(input logic [7:0] a);
    logic [7:0] inv = 8'd0, s;
    if (a != 8'd0) begin
      inv = 8'd1;
      for (int i = 0; i < 254; i++) inv = gmul(inv, a);   // a^254 = a^-1
    end
    s = inv;
    for (int i = 1; i < 5; i++) s ^= (inv << i) | (inv >> (8 - i));
    return s ^ 8'h63;
  endfunction

  function automatic logic [127:0] aes128(input logic [127:0] key, input logic [127:0] pt);
    logic [7:0] st [16], t [16], w [44][4], tmp [4], rc;
    for (int i = 0; i < 16; i++) st[i] = pt[127 - 8*i -: 8];
    for (int j = 0; j < 4; j++)
      for (int i = 0; i < 4; i++) w[j][i] = key[127 - 8*(4*j + i) -: 8];
    rc = 8'h01;
    for (int j = 4; j < 44; j++) begin
      for (int i = 0; i < 4; i++) tmp[i] = w[j-1][i];
      if (j % 4 == 0) begin
        for (int i = 0; i < 4; i++) tmp[i] = sbox(w[j-1][(i + 1) % 4]);
        tmp[0] ^= rc;
        rc = gmul(rc, 8'h02);
      end
      for (int i = 0; i < 4; i++) w[j][i] = w[j-4][i] ^ tmp[i];
    end
    for (int c = 0; c < 4; c++) for (int i = 0; i < 4; i++) st[4*c + i] ^= w[c][i];
    for (int r = 1; r <= 10; r++) begin
      for (int c = 0; c < 4; c++)                          // SubBytes + ShiftRows
        for (int i = 0; i < 4; i++) t[4*c + i] = sbox(st[4*((c + i) % 4) + i]);
      if (r < 10)
        for (int c = 0; c < 4; c++)                        // MixColumns
          for (int i = 0; i < 4; i++)
            st[4*c + i] = gmul(t[4*c + i], 8'h02) ^ gmul(t[4*c + (i+1)%4], 8'h03)
                        ^ t[4*c + (i+2)%4] ^ t[4*c + (i+3)%4];
      else
        for (int k = 0; k < 16; k++) st[k] = t[k];
      for (int c = 0; c < 4; c++) for (int i = 0; i < 4; i++) st[4*c + i] ^= w[4*r + c][i];
    end
    for (int i = 0; i < 16; i++) aes128[127 - 8*i -: 8] = st[i];
  endfunction

  function automatic logic [31:0] keystream(input logic [127:0] key, input logic [7:0] domain,
                                            input logic [31:0] addr);
    logic [127:0] o;
    o = aes128(key, {88'd0, domain, addr});
    return o[31:0];
  endfunction
endpackage
