// des_core: iterative DES encryption / decryption, one round per clock.
//
// start (one cycle, while not busy) loads IP(din) into the L/R registers and
// latches key and direction.  Each of the next 16 clocks performs one round,
// L' = R, R' = L ^ f(R, K_n), with K_1..K_16 for encryption and K_16..K_1 for
// decryption.  After the 16th round the halves are swapped, IP^-1 is applied and
// dout is registered together with a one-cycle done pulse: done rises 16 clocks
// after the clock that sampled start (latency 16 cycles, one block per 16 cycles).
// The round structure is the paper's; the start/busy/done handshake is this
// design's.
module des_core #(
  parameter int unsigned ROUNDS = 16
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  logic        decrypt,
  input  logic [63:0] key,
  input  logic [63:0] din,
  output logic        busy,
  output logic        done,
  output logic [63:0] dout
);
  logic [31:0] l, r, f;
  logic [63:0] key_q, ip_out, fp_out;
  logic        dec_q;
  logic [3:0]  cnt;
  logic [47:0] subkey;

  permutation_unit #(.IN_W(64), .OUT_W(64), .TAB(des_pkg::IP_T)) u_ip (.din(din), .dout(ip_out));
  des_key_schedule u_ks (.key(key_q), .round(dec_q ? 4'(ROUNDS - 1 - cnt) : cnt), .subkey(subkey));
  des_f            u_f  (.r(r), .k(subkey), .f(f));
  // swap of the last round's halves, then IP^-1
  permutation_unit #(.IN_W(64), .OUT_W(64), .TAB(des_pkg::FP_T)) u_fp (.din({l ^ f, r}), .dout(fp_out));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0;
      done <= 1'b0;
      cnt  <= '0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        {l, r} <= ip_out;
        key_q  <= key;
        dec_q  <= decrypt;
        cnt    <= '0;
        busy   <= 1'b1;
      end else if (busy) begin
        l   <= r;
        r   <= l ^ f;
        cnt <= cnt + 4'd1;
        if (cnt == 4'(ROUNDS - 1)) begin
          busy <= 1'b0;
          done <= 1'b1;
          dout <= fp_out;
        end
      end
    end
  end
endmodule
