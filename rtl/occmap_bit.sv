// occmap_bit: occupancy test and update inside one OccMap block.
//
// The OccMap is a bit-mask with one bit per physical block (1 = holds a live
// block, 0 = vacant or stale).  It is cut into 1024-bit OccMap blocks; the
// block covering physical location s is OccMap block s / 1024 and the bit is
// s mod 1024.  Given an OccMap block and a location, this unit returns the
// bit and the block with that bit set (mark occupied) or cleared (vacate).
//
// Purely combinational.  The whole physical address is taken so the caller
// need not slice it; the upper bits select the OccMap block, which the
// caller has already fetched, so only the low 10 bits are used here (a lint
// tool reports the unused upper bits).
module occmap_bit
  import flat_oram_pkg::*;
(
  input  blk_t blk_in,
  input  pa_t  pos,
  input  logic set,      // 1: mark occupied, 0: vacate
  output logic occupied,
  output blk_t blk_out
);
  localparam int unsigned OW = $clog2(OCC_PER_BLK);
  logic [OW-1:0] off;
  always_comb begin
    off      = pos[OW-1:0];
    occupied = blk_in[off];
    blk_out  = blk_in;
    blk_out[off] = set;
  end
endmodule
