// crypt_engine: probabilistic counter-mode encryption of one DRAM line.
//
// The payload (1024-bit block plus its 64-bit MAC) is XORed with a keystream
// of 17 64-bit words, word i = PRF(K_enc ^ i, iv).  The nonce iv travels in
// the clear in the DRAM line; the controller draws a fresh iv for every DRAM
// write, so re-writing unchanged plaintext (collision handling, periodic
// dummy rewrites) still produces an unrelated ciphertext.  Encryption and
// decryption are the same operation.  The keystream generator stands in for
// AES counter mode, which the design takes from prior work.
//
// Purely combinational: dout follows key/iv/din in the same cycle.
module crypt_engine
  import flat_oram_pkg::*;
(
  input  logic [63:0]                key,
  input  iv_t                        iv,
  input  logic [BLOCK_BITS+MAC_W-1:0] din,
  output logic [BLOCK_BITS+MAC_W-1:0] dout
);
  logic [BLOCK_BITS+MAC_W-1:0] ks;

  always_comb begin
    for (int i = 0; i < KS_WORDS; i++)
      ks[i*64 +: 64] = prf64(key ^ TWEAK_ENC ^ 64'(i), iv);
    dout = din ^ ks;
  end
endmodule
