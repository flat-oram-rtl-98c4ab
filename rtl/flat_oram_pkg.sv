// flat_oram_pkg: types, constants and pure functions shared by the Flat ORAM
// write-only ORAM controller.
//
// Block geometry follows the main configuration: 128-byte ORAM blocks
// (1024 bits), so one OccMap block covers 1024 physical locations (one bit
// each).  A PosMap block holds POSMAP_X = 32 per-block write counters of
// 32 bits (this design's choice; a compressed PosMap with group counters is
// not used).  A DRAM line carries the encrypted block, its 64-bit MAC and
// the 64-bit nonce (IV) of its counter-mode encryption in the clear.
//
// prf64 is a keyed 64-bit mixing function used wherever a pseudo-random
// function is needed: block positions, keystream words and the MAC chain.
// It is a placeholder for a real cipher (AES) and is NOT cryptographically
// strong; it only has the same interface role.
package flat_oram_pkg;

  localparam int unsigned BLOCK_BITS = 1024;          // 128-byte block
  localparam int unsigned OCC_PER_BLK = BLOCK_BITS;   // OccMap scaling factor
  localparam int unsigned CTR_W      = 32;            // PosMap counter width
  localparam int unsigned POSMAP_X   = BLOCK_BITS / CTR_W; // counters per block
  localparam int unsigned MAC_W      = 64;
  localparam int unsigned IV_W       = 64;
  localparam int unsigned LINE_BITS  = BLOCK_BITS + MAC_W + IV_W; // DRAM line
  localparam int unsigned KS_WORDS   = (BLOCK_BITS + MAC_W) / 64; // 17
  localparam int unsigned NUM_LEVELS = 4;             // hierarchies 0..3

  typedef logic [31:0]            id_t;     // unified logical block id
  typedef logic [31:0]            pa_t;     // physical block address
  typedef logic [CTR_W-1:0]       ctr_t;
  typedef logic [BLOCK_BITS-1:0]  blk_t;
  typedef logic [MAC_W-1:0]       mac_t;
  typedef logic [IV_W-1:0]        iv_t;
  typedef logic [LINE_BITS-1:0]   line_t;

  // DRAM line layout: {iv, enc(mac), enc(data)}
  typedef struct packed {
    iv_t  iv;
    mac_t mac;
    blk_t data;
  } dram_line_t;

  // Derived sub-keys (fixed tweaks of the one secret key).
  localparam logic [63:0] TWEAK_POS   = 64'h6a09e667f3bcc908;
  localparam logic [63:0] TWEAK_ENC   = 64'hbb67ae8584caa73b;
  localparam logic [63:0] TWEAK_MAC   = 64'h3c6ef372fe94f82b;
  localparam logic [63:0] TWEAK_DUMMY = 64'ha54ff53a5f1d36f1;

  // splitmix64-style finaliser
  function automatic logic [63:0] fmix64(input logic [63:0] x);
    logic [63:0] z;
    z = x;
    z = (z ^ (z >> 30)) * 64'hbf58476d1ce4e5b9;
    z = (z ^ (z >> 27)) * 64'h94d049bb133111eb;
    z = z ^ (z >> 31);
    return z;
  endfunction

  // keyed PRF: two keyed mixing rounds
  function automatic logic [63:0] prf64(input logic [63:0] key,
                                        input logic [63:0] x);
    logic [63:0] z;
    z = fmix64(x ^ key);
    z = fmix64(z ^ {key[31:0], key[63:32]} ^ 64'h9e3779b97f4a7c15);
    return z;
  endfunction

  // Geometry of the unified block-id space (Fig. 1): level 0 holds the data
  // blocks [0, n_data) followed by the OccMap blocks; level L > 0 holds the
  // PosMap blocks covering level L-1, POSMAP_X entries per block.
  function automatic longint unsigned level_count(input longint unsigned n_data,
                                                  input int unsigned phys_aw,
                                                  input int unsigned lvl);
    longint unsigned c;
    c = n_data + ((64'd1 << phys_aw) / 64'(OCC_PER_BLK));
    for (int unsigned i = 0; i < lvl; i++) c = (c + 64'(POSMAP_X) - 64'd1) / 64'(POSMAP_X);
    return c;
  endfunction

  function automatic longint unsigned level_base(input longint unsigned n_data,
                                                 input int unsigned phys_aw,
                                                 input int unsigned lvl);
    longint unsigned b;
    b = 0;
    for (int unsigned i = 0; i < lvl; i++) b += level_count(n_data, phys_aw, i);
    return b;
  endfunction

  // Position of block id under counter c: s = PRF_K(a || c) mod P.
  function automatic pa_t block_pos(input logic [63:0] key, input id_t id,
                                    input ctr_t c, input int unsigned phys_aw);
    logic [63:0] r;
    r = prf64(key ^ TWEAK_POS, {id, c});
    return pa_t'(r & ((64'd1 << phys_aw) - 64'd1));
  endfunction

  // Event counters exported by the controller (for monitoring and tests).
  typedef struct packed {
    logic [31:0] reads;            // read requests served
    logic [31:0] stash_read_hits;  // reads served from the stash
    logic [31:0] evictions;        // blocks written to a vacant location
    logic [31:0] collisions;       // eviction attempts that hit an occupied slot
    logic [31:0] plb_hits;         // PLB lookups that hit
    logic [31:0] plb_fills;        // blocks brought into the PLB
    logic [31:0] plb_dirty_victims;// dirty PLB blocks moved to the stash
    logic [31:0] stash_pulls;      // PLB fills served from the stash
    logic [31:0] bg_phases;        // background-eviction phases entered
    logic [31:0] dummy_rewrites;   // periodic dummy read/re-encrypt/writes
    logic [31:0] clean_drops;      // clean write-backs discarded
    logic [31:0] integrity_fails;  // MAC mismatches
    logic [31:0] dram_reads;
    logic [31:0] dram_writes;
  } stats_t;

endpackage
