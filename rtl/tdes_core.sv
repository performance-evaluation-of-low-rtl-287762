// tdes_core: Triple DES (three keys), three DES rounds per clock.
//
// Encryption is DES(K1), then DES^-1(K2), then DES(K3); decryption is
// DES^-1(K3), DES(K2), DES^-1(K1).  Between two DES passes the inverse and the
// initial permutation cancel, so the 48 rounds run back to back on one L/R pair
// with only a half swap after rounds 16 and 32; IP is applied at the start and
// the final swap and IP^-1 at the end.  Three round units (each with its own
// key-schedule copy) are chained, so a block takes 16 clocks like single DES:
// done pulses 16 clocks after the clock that sampled start.  The E-D-E order is
// the paper's; the three-rounds-per-clock structure is this design's way of
// meeting the 16-cycle figure the paper gives for both DES and TDES.
module tdes_core #(
  parameter int unsigned ROUNDS_PER_CYCLE = 3
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  logic        decrypt,
  input  logic [63:0] key1,
  input  logic [63:0] key2,
  input  logic [63:0] key3,
  input  logic [63:0] din,
  output logic        busy,
  output logic        done,
  output logic [63:0] dout
);
  localparam int unsigned TOTAL  = 48;
  localparam int unsigned CYCLES = TOTAL / ROUNDS_PER_CYCLE;

  logic [31:0] l, r;
  logic [63:0] k1, k2, k3, ip_out, fp_out;
  logic        dec_q;
  logic [5:0]  cnt;
  logic [31:0] cl [ROUNDS_PER_CYCLE+1];
  logic [31:0] cr [ROUNDS_PER_CYCLE+1];

  permutation_unit #(.IN_W(64), .OUT_W(64), .TAB(des_pkg::IP_T)) u_ip (.din(din), .dout(ip_out));

  assign cl[0] = l;
  assign cr[0] = r;
  for (genvar j = 0; j < ROUNDS_PER_CYCLE; j++) begin : g_round
    logic [5:0]  g;       // global round 0..47
    logic [1:0]  pass;    // DES pass 0..2
    logic [3:0]  rnd;     // round inside the pass
    logic        inv;     // this pass runs DES^-1
    logic [63:0] k;
    logic [47:0] sk;
    logic [31:0] f, nr;
    always_comb begin
      g    = 6'(cnt * ROUNDS_PER_CYCLE + j);
      pass = 2'(g / 16);
      rnd  = 4'(g % 16);
      inv  = (pass == 2'd1) ^ dec_q;
      unique case (pass)
        2'd0:    k = dec_q ? k3 : k1;
        2'd1:    k = k2;
        default: k = dec_q ? k1 : k3;
      endcase
    end
    des_key_schedule u_ks (.key(k), .round(inv ? 4'(15 - rnd) : rnd), .subkey(sk));
    des_f            u_f  (.r(cr[j]), .k(sk), .f(f));
    assign nr = cl[j] ^ f;
    // L' = R, R' = L ^ f; after the last round of pass 0 and 1 the halves swap
    assign cl[j+1] = (rnd == 4'd15 && pass != 2'd2) ? nr : cr[j];
    assign cr[j+1] = (rnd == 4'd15 && pass != 2'd2) ? cr[j] : nr;
  end

  permutation_unit #(.IN_W(64), .OUT_W(64), .TAB(des_pkg::FP_T))
    u_fp (.din({cr[ROUNDS_PER_CYCLE], cl[ROUNDS_PER_CYCLE]}), .dout(fp_out));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0;
      done <= 1'b0;
      cnt  <= '0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        {l, r} <= ip_out;
        k1 <= key1; k2 <= key2; k3 <= key3;
        dec_q <= decrypt;
        cnt   <= '0;
        busy  <= 1'b1;
      end else if (busy) begin
        l   <= cl[ROUNDS_PER_CYCLE];
        r   <= cr[ROUNDS_PER_CYCLE];
        cnt <= cnt + 6'd1;
        if (cnt == 6'(CYCLES - 1)) begin
          busy <= 1'b0;
          done <= 1'b1;
          dout <= fp_out;
        end
      end
    end
  end
endmodule
