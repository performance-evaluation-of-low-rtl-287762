// des_model_pkg: behavioural DES reference used by the testbenches.
//
// A plain loop-based model of FIPS 46-3 (permute by table, 16 rounds with the
// shift-register key schedule, swap, inverse permutation) written independently
// of the RTL round units; it only shares the standard's constant tables.  Also
// gives the keystream word the processor's crypto units XOR onto a 32-bit word:
// the low 32 bits of DES_K({24'b0, domain, byte address}).
package des_model_pkg;
  import des_pkg::*;

  function automatic logic [63:0] permute(input logic [63:0] x, input int in_w,
                                          input int unsigned tab [], input int out_w);
    logic [63:0] y = '0;
    for (int k = 0; k < out_w; k++) y[out_w-1-k] = x[in_w - tab[k]];
    return y;
  endfunction

  function automatic logic [31:0] f(input logic [31:0] r, input logic [47:0] k);
    logic [47:0] x;
    logic [31:0] s;
    x = 48'(permute(64'(r), 32, E_T, 48)) ^ k;
    for (int i = 0; i < 8; i++) begin
      logic [5:0] b;
      b = x[47-6*i -: 6];
      s[31-4*i -: 4] = SBOX[i][{b[5], b[0]} * 16 + b[4:1]];
    end
    return 32'(permute(64'(s), 32, P_T, 32));
  endfunction

  function automatic logic [63:0] des(input logic [63:0] key, input logic [63:0] blk,
                                      input bit decrypt = 1'b0);
    localparam int SHIFTS [16] = '{1,1,2,2,2,2,2,2,1,2,2,2,2,2,2,1};
    logic [47:0] ks [16];
    logic [27:0] c, d;
    logic [55:0] cd;
    logic [63:0] x;
    logic [31:0] l, r, t;
    cd = 56'(permute(key, 64, PC1_T, 56));
    c = cd[55:28]; d = cd[27:0];
    for (int n = 0; n < 16; n++) begin
      repeat (SHIFTS[n]) begin
        c = {c[26:0], c[27]};
        d = {d[26:0], d[27]};
      end
      ks[n] = 48'(permute(64'({c, d}), 56, PC2_T, 48));
    end
    x = permute(blk, 64, IP_T, 64);
    l = x[63:32]; r = x[31:0];
    for (int n = 0; n < 16; n++) begin
      t = r;
      r = l ^ f(r, ks[decrypt ? 15 - n : n]);
      l = t;
    end
    return permute({r, l}, 64, FP_T, 64);
  endfunction

  function automatic logic [31:0] keystream(input logic [63:0] key, input logic [7:0] domain,
                                            input logic [31:0] addr);
    logic [63:0] o;
    o = des(key, {24'd0, domain, addr});
    return o[31:0];
  endfunction
endpackage
