// oram_init: start-up placement of every logical data block (Algorithm 1).
//
// Initialisation gives each of the N logical blocks a uniformly random vacant
// physical location and marks it occupied.  That is exactly what the stash
// eviction loop does for a block that has never been written, so this
// engine simply feeds the N data blocks, with all-zero contents, through the
// write-back port into the stash; the controller's eviction loop then picks
// random locations, skips occupied ones and records the positions.
// Sequencing blocks through the stash (rather than a separate loop) is this
// design's choice.  `busy` is high from `start` until the last block has
// been handed over; the controller reports completion separately once the
// stash has drained.
//
// One block is offered per cycle on wb_*; a block is taken when wb_ready.
module oram_init
  import flat_oram_pkg::*;
#(
  parameter longint unsigned N_DATA = 64'd33554432
) (
  input  logic clk,
  input  logic rst_n,
  input  logic start,
  output logic busy,
  output logic wb_valid,
  output id_t  wb_id,
  output blk_t wb_data,
  input  logic wb_ready
);
  id_t next;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0;
      next <= '0;
    end else if (!busy) begin
      if (start) begin
        busy <= 1'b1;
        next <= '0;
      end
    end else if (wb_ready) begin
      if (64'(next) == N_DATA - 1) busy <= 1'b0;
      next <= next + 1'b1;
    end
  end

  assign wb_valid = busy;
  assign wb_id    = next;
  assign wb_data  = '0;
endmodule
