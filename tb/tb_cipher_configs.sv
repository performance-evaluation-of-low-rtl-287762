// tb_cipher_configs: the processor in its TDES and AES-128 configurations.
//
// The default build (DES) is covered by tb_mips_crypto_top.  This test builds
// mips_crypto_top once with the TDES core and once with the AES-128 core and runs
// the same encrypted program on both (see cipher_config_run): key loading with
// LKLW/LKUW, encrypted instructions, an encrypted store and load, and the fetch
// interval each cipher gives (19 clocks with TDES, 43 with AES-128).  Memories
// and register file are at their default sizes.
module tb_cipher_configs;
  import mips_pkg::*;
  logic done_tdes, done_aes;
  int   checks_tdes, failures_tdes, checks_aes, failures_aes;

  cipher_config_run #(.ALG(ALG_TDES)) u_tdes (.done(done_tdes), .checks(checks_tdes), .failures(failures_tdes));
  cipher_config_run #(.ALG(ALG_AES))  u_aes  (.done(done_aes),  .checks(checks_aes),  .failures(failures_aes));

  initial begin
    #1;   // let both runners clear done first
    wait (done_tdes && done_aes);
    $display("TB_RESULT checks=%0d failures=%0d", checks_tdes + checks_aes, failures_tdes + failures_aes);
    $finish;
  end

  initial begin
    #200us;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks_tdes + checks_aes + 1,
             failures_tdes + failures_aes + 1);
    $finish;
  end
endmodule
