// pmmac: PosMap-MAC integrity tag h = MAC_K(a || c || data).
//
// Because the PosMap counter c of block a grows on every write, binding it
// into the tag gives freshness as well as authenticity: a replayed older
// line carries a tag for an older counter and fails the check.  The MAC is a
// chained keyed PRF over the 64-bit word {a, c} followed by the 16 data
// words (a CBC-MAC-like construction standing in for a keyed cryptographic
// hash).  mac_out is the tag to store on a write; ok compares it with the
// tag recovered from DRAM on a read.
//
// Purely combinational.
module pmmac
  import flat_oram_pkg::*;
(
  input  logic [63:0] key,
  input  id_t         id,
  input  ctr_t        ctr,
  input  blk_t        data,
  input  mac_t        mac_in,
  output mac_t        mac_out,
  output logic        ok
);
  always_comb begin
    logic [63:0] h;
    h = prf64(key ^ TWEAK_MAC, {id, ctr});
    for (int i = 0; i < BLOCK_BITS / 64; i++)
      h = prf64(key ^ TWEAK_MAC, h ^ data[i*64 +: 64]);
    mac_out = h;
    ok      = (h == mac_in);
  end
endmodule
