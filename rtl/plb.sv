// plb: PosMap Lookaside Buffer.
//
// Caches PosMap blocks of every hierarchy and OccMap blocks on chip, so that
// the recursive position lookup and the occupancy test of a candidate
// location usually need no DRAM access.  Capacity defaults to 32 KB, i.e.
// 256 blocks of 128 bytes (the paper's size).  The organisation is this
// design's own choice: direct-mapped, indexed by the unified block id modulo
// ENTRIES.  Each entry keeps the id, the block, a dirty bit and old_valid
// (an older copy of the block still occupies a DRAM location).  A clean
// victim is simply dropped, a dirty one must be moved to the stash by the
// controller before the fill (the victim is shown on vic_*).
//
// Ports: lk_id is looked up combinationally (lk_*), and vic_* shows the
// entry at lk_id's index.  fill_* writes a whole entry at fill_id's index;
// wr_* overwrites the data of the entry at wr_id's index and marks it dirty.
// Both writes take effect at the next clock edge; fill has priority.
module plb
  import flat_oram_pkg::*;
#(
  parameter int unsigned ENTRIES = 256,
  localparam int unsigned IW = $clog2(ENTRIES)
) (
  input  logic clk,
  input  logic rst_n,
  input  id_t  lk_id,
  output logic lk_hit,
  output blk_t lk_data,
  output logic vic_valid,
  output logic vic_dirty,
  output logic vic_old_valid,
  output id_t  vic_id,
  input  logic fill_valid,
  input  id_t  fill_id,
  input  blk_t fill_data,
  input  logic fill_dirty,
  input  logic fill_old_valid,
  input  logic wr_valid,
  input  id_t  wr_id,
  input  blk_t wr_data
);
  logic [ENTRIES-1:0] valid, dirty, oldv;
  id_t                tags [ENTRIES];
  blk_t               data [ENTRIES];

  logic [IW-1:0] lk_ix, fill_ix, wr_ix;
  assign lk_ix   = lk_id[IW-1:0];
  assign fill_ix = fill_id[IW-1:0];
  assign wr_ix   = wr_id[IW-1:0];

  always_comb begin
    lk_hit        = valid[lk_ix] && tags[lk_ix] == lk_id;
    lk_data       = data[lk_ix];
    vic_valid     = valid[lk_ix];
    vic_dirty     = dirty[lk_ix];
    vic_old_valid = oldv[lk_ix];
    vic_id        = tags[lk_ix];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      valid <= '0;
      dirty <= '0;
      oldv  <= '0;
    end else if (fill_valid) begin
      valid[fill_ix] <= 1'b1;
      dirty[fill_ix] <= fill_dirty;
      oldv[fill_ix]  <= fill_old_valid;
    end else if (wr_valid) begin
      dirty[wr_ix] <= 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (fill_valid) begin
      tags[fill_ix] <= fill_id;
      data[fill_ix] <= fill_data;
    end else if (wr_valid) begin
      data[wr_ix] <= wr_data;
    end
  end

  a_wr_hits: assert property (@(posedge clk) disable iff (!rst_n)
                              wr_valid && !fill_valid |-> valid[wr_ix] && tags[wr_ix] == wr_id);
endmodule
