// aes_core: AES-128 encryption and decryption, one state column per clock.
//
// Encryption: start (while not busy, decrypt = 0) latches the key and loads
// state = din ^ key (the initial AddRoundKey with K[0]).  Each round then takes
// four clocks; in clock c (c = 0..3) the core
//   * derives word c of the next round key: w0' = w0 ^ SubWord(RotWord(w3)) ^ Rcon,
//     wc' = wc ^ w(c-1)' for c > 0 (key expansion on the fly),
//   * forms output column c of the round: bytes (row i) taken from column
//     (c + i) mod 4 of the state (ShiftRows), passed through the S-box (SubBytes),
//     MixColumns (skipped in the last round) and XORed with wc' (AddRoundKey),
// and writes it into a shadow state; after column 3 the shadow becomes the state.
// Nr = 10 rounds give done (with dout registered) 40 clocks after the clock that
// sampled start.
//
// Decryption (decrypt = 1) needs the last round key first: the core runs the key
// expansion one whole round key per clock for Nr clocks, then loads
// state = din ^ K[Nr] and runs the inverse rounds, again one column per clock.
// Output column c takes row i from column (c - i) mod 4 (InvShiftRows), applies
// the inverse S-box, XORs word c of the previous round key and applies
// InvMixColumns (skipped in the last round).  The previous round key is derived
// backwards from the current one: wc = wc' ^ w(c-1)' for c > 0 and
// w0 = w0' ^ SubWord(RotWord(w3' ^ w2')) ^ Rcon, with Rcon divided by {02} after
// each round.  done follows 10 + 40 = 50 clocks after start.
//
// Byte 0 of the state is din[127:120]; column c is bytes 4c..4c+3.  The round
// sequence follows the AES standard the paper describes; the column-serial
// datapath and the key-preparation pass for decryption are this design's.
module aes_core #(
  parameter int unsigned NR = 10
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         start,
  input  logic         decrypt,
  input  logic [127:0] key,
  input  logic [127:0] din,
  output logic         busy,
  output logic         done,
  output logic [127:0] dout
);
  import aes_pkg::*;

  logic [127:0] st, shadow, rk, nk, fk;
  logic [1:0]   col;
  logic [3:0]   rnd;       // 1..NR
  logic [7:0]   rcon;
  logic         dec_q, prep;
  logic [31:0]  kw, sc, oc, w3, t;

  function automatic logic [31:0] word_of(input logic [127:0] v, input logic [1:0] c);
    return v[127 - 32*c -: 32];
  endfunction
  function automatic logic [7:0] byte_of(input logic [127:0] v, input int unsigned b);
    return v[127 - 8*b -: 8];
  endfunction

  // whole next round key (decryption key preparation)
  always_comb begin
    w3 = word_of(rk, 2'd3);
    fk[127:96] = word_of(rk, 2'd0) ^ sub_word({w3[23:0], w3[31:24]}) ^ {rcon, 24'h0};
    fk[95:64]  = word_of(rk, 2'd1) ^ fk[127:96];
    fk[63:32]  = word_of(rk, 2'd2) ^ fk[95:64];
    fk[31:0]   = w3 ^ fk[63:32];
  end

  always_comb begin
    t = word_of(rk, 2'd3) ^ word_of(rk, 2'd2);
    if (!dec_q) begin
      // next round-key word, forward
      if (col == 2'd0) kw = fk[127:96];
      else             kw = word_of(rk, col) ^ word_of(nk, 2'(col - 2'd1));
      // ShiftRows + SubBytes for output column col
      for (int i = 0; i < 4; i++)
        sc[31 - 8*i -: 8] = SBOX[byte_of(st, 4 * ((int'(col) + i) % 4) + i)];
      oc = ((rnd == 4'(NR)) ? sc : mix_col(sc)) ^ kw;
    end else begin
      // previous round-key word, backward
      if (col == 2'd0) kw = word_of(rk, 2'd0) ^ sub_word({t[23:0], t[31:24]}) ^ {rcon, 24'h0};
      else             kw = word_of(rk, col) ^ word_of(rk, 2'(col - 2'd1));
      // InvShiftRows + InvSubBytes for output column col
      for (int i = 0; i < 4; i++)
        sc[31 - 8*i -: 8] = INV_SBOX[byte_of(st, 4 * ((int'(col) - i + 4) % 4) + i)];
      oc = (rnd == 4'(NR)) ? (sc ^ kw) : inv_mix_col(sc ^ kw);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0;
      done <= 1'b0;
      prep <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        st    <= decrypt ? din : din ^ key;
        rk    <= key;
        rnd   <= 4'd1;
        col   <= 2'd0;
        rcon  <= 8'h01;
        dec_q <= decrypt;
        prep  <= decrypt;
        busy  <= 1'b1;
      end else if (busy && prep) begin
        rk  <= fk;
        rnd <= rnd + 4'd1;
        if (rnd == 4'(NR)) begin        // fk is K[NR]; rcon stays at Rcon[NR]
          st   <= st ^ fk;
          rnd  <= 4'd1;
          prep <= 1'b0;
        end else begin
          rcon <= xtime(rcon);
        end
      end else if (busy) begin
        shadow[127 - 32*col -: 32] <= oc;
        nk[127 - 32*col -: 32]     <= kw;
        col <= col + 2'd1;
        if (col == 2'd3) begin
          st   <= {shadow[127:32], oc};
          rk   <= {nk[127:32], kw};
          rnd  <= rnd + 4'd1;
          rcon <= dec_q ? inv_xtime(rcon) : xtime(rcon);
          if (rnd == 4'(NR)) begin
            busy <= 1'b0;
            done <= 1'b1;
            dout <= {shadow[127:32], oc};
          end
        end
      end
    end
  end
endmodule
