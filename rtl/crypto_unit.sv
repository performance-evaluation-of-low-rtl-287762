// crypto_unit: encrypts or decrypts one 32-bit word with the selected block cipher.
//
// A 32-bit instruction or data word is smaller than the cipher block (64 bits for
// DES/TDES, 128 for AES), so the unit runs the cipher in counter fashion: the
// block {DOMAIN, byte address} (zero-extended) is enciphered under the current
// key and the low 32 bits of the result, the keystream, are XORed with the word.
// The same operation therefore encrypts and decrypts, and each stored word gets
// its own keystream.  This word mapping is this design's; the paper places an
// encryption and a decryption core at fetch and memory access without saying how
// words map onto cipher blocks.
//
// Interface: while req is high the unit makes sure a keystream for addr exists;
// ready is high (combinationally) once it does, and dout = din ^ keystream is then
// valid.  The last keystream is kept, so a word at the same address is ready at
// once.  key_wr (a key-register write) discards it, also one still being computed.
// Latency of a miss: one clock to start plus the cipher's latency (16 clocks for
// DES and TDES, 40 for AES) plus one clock to capture the result.
//
// Key use: DES takes key slot 0 ({word1, word0}); TDES slots 0, 1, 2 as K1, K2,
// K3; AES-128 takes {word3, word2, word1, word0}.
module crypto_unit
  import mips_pkg::*;
#(
  parameter crypto_alg_e ALG    = ALG_DES,
  parameter logic [7:0]  DOMAIN = 8'd0
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         req,
  input  logic [31:0]  addr,
  input  logic [191:0] keys,
  input  logic         key_wr,
  input  logic [31:0]  din,
  output logic [31:0]  dout,
  output logic         ready
);
  logic        valid, stale, start, busy, done;
  logic [31:0] tag, pend, ks;
  logic [63:0] blk_out64;
  logic [127:0] blk_out128;

  assign ready = valid && tag == addr;
  assign start = req && !ready && !busy && !done;
  assign dout  = din ^ ks;

  if (ALG == ALG_DES) begin : g_des
    des_core u_core (
      .clk, .rst_n, .start, .decrypt(1'b0), .key(keys[63:0]),
      .din({24'd0, DOMAIN, addr}), .busy, .done, .dout(blk_out64));
    assign blk_out128 = {64'd0, blk_out64};
  end else if (ALG == ALG_TDES) begin : g_tdes
    tdes_core u_core (
      .clk, .rst_n, .start, .decrypt(1'b0),
      .key1(keys[63:0]), .key2(keys[127:64]), .key3(keys[191:128]),
      .din({24'd0, DOMAIN, addr}), .busy, .done, .dout(blk_out64));
    assign blk_out128 = {64'd0, blk_out64};
  end else begin : g_aes
    aes_core u_core (
      .clk, .rst_n, .start, .decrypt(1'b0), .key(keys[127:0]),
      .din({88'd0, DOMAIN, addr}), .busy, .done, .dout(blk_out128));
    assign blk_out64 = blk_out128[63:0];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      valid <= 1'b0;
      stale <= 1'b0;
    end else begin
      if (start) begin
        pend  <= addr;
        stale <= 1'b0;
      end
      if (done && !stale && !key_wr) begin
        valid <= 1'b1;
        tag   <= pend;
        ks    <= blk_out128[31:0];
      end
      if (key_wr) begin
        valid <= 1'b0;
        if (busy) stale <= 1'b1;
      end
    end
  end
endmodule
