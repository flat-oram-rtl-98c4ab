// pos_gen: position generator of the compressed position map.
//
// A block's PosMap entry is a write counter c rather than an address; its
// physical location is recomputed as s = PRF_K(a || c) mod P, where a is the
// unified block id and P = 2**PHYS_AW physical blocks.  Incrementing c on
// every eviction attempt (successful or not) yields a fresh uniformly random
// candidate location each time.  The PRF is the package's keyed mixing
// function standing in for the AES-based PRF; taking the low PHYS_AW bits as
// "mod P" requires P to be a power of two (8 GB / 128 B = 2**26 by default).
//
// Purely combinational: pos is valid in the same cycle as key/id/ctr.
module pos_gen
  import flat_oram_pkg::*;
#(
  parameter int unsigned PHYS_AW = 26
) (
  input  logic [63:0] key,
  input  id_t         id,
  input  ctr_t        ctr,
  output pa_t         pos
);
  always_comb pos = block_pos(key, id, ctr, PHYS_AW);
endmodule
