// tb_crypt_engine: checks each keystream word against the reference PRF,
// that decrypting an encryption returns the plaintext, and that the same
// plaintext under two nonces gives different ciphertexts.
module tb_crypt_engine;
  import flat_oram_pkg::*;
  import tb_ref_pkg::*;
  logic [63:0] key;
  iv_t iv;
  logic [BLOCK_BITS+MAC_W-1:0] din, dout, dout2;
  int checks = 0, failures = 0;

  crypt_engine dut  (.key, .iv, .din, .dout);
  crypt_engine dut2 (.key, .iv(iv), .din(dout), .dout(dout2));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [BLOCK_BITS+MAC_W-1:0] c1;
    key = {$urandom, $urandom};
    for (int t = 0; t < 50; t++) begin
      iv = {$urandom, $urandom};
      for (int w = 0; w < 34; w++) din[w*32 +: 32] = $urandom;
      #1;
      for (int w = 0; w < 17; w++) begin
        checks++;
        if ((dout[w*64 +: 64] ^ din[w*64 +: 64]) != ref_ks(key, iv, w)) failures++;
      end
      checks++;
      if (dout2 != din) failures++;
      c1 = dout;
      iv = iv + 1;
      #1;
      checks++;
      if (dout == c1) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
