// stash: on-chip buffer of dirty blocks waiting to be written to DRAM.
//
// Only dirty blocks enter the stash: write-backs of modified data blocks from
// the last-level cache and dirty PosMap/OccMap blocks displaced from the PLB.
// Each slot holds the unified block id, the block contents and old_valid,
// which says that an older copy of the block still occupies a DRAM location
// whose OccMap bit has not yet been cleared.  The default capacity of 100
// blocks is the paper's; the slot organisation is this design's own.
//
// Ports (all single-cycle):
//   ins_*   insert a block.  If the id is already present its data is
//           overwritten in place (old_valid kept); otherwise the lowest free
//           slot is taken.  ins_ok says the insert can be accepted this cycle.
//   lk_*    combinational associative lookup of lk_id.
//   rd_*    combinational read of slot rd_idx.
//   rm_*    free slot rm_idx.   clr_*  clear old_valid of slot clr_idx.
//   hd_*    lowest occupied slot (the next block to evict).
//   count   number of occupied slots.
// An insert and a remove may happen in the same cycle in different slots.
// The assertions are disabled during reset, which a lint tool reports as
// rst_n being used both synchronously and asynchronously; harmless.
module stash
  import flat_oram_pkg::*;
#(
  parameter int unsigned SIZE = 100,
  localparam int unsigned IW = $clog2(SIZE)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          ins_valid,
  input  id_t           ins_id,
  input  blk_t          ins_data,
  input  logic          ins_old_valid,
  output logic          ins_ok,
  input  id_t           lk_id,
  output logic          lk_hit,
  output logic [IW-1:0] lk_idx,
  input  logic [IW-1:0] rd_idx,
  output logic          rd_valid,
  output id_t           rd_id,
  output blk_t          rd_data,
  output logic          rd_old_valid,
  input  logic          rm_valid,
  input  logic [IW-1:0] rm_idx,
  input  logic          clr_valid,
  input  logic [IW-1:0] clr_idx,
  output logic          hd_valid,
  output logic [IW-1:0] hd_idx,
  output logic [IW:0]   count
);
  logic [SIZE-1:0] valid;
  logic [SIZE-1:0] oldv;
  id_t             ids  [SIZE];
  blk_t            data [SIZE];

  logic          ins_hit, free_any;
  logic [IW-1:0] ins_hidx, free_idx;

  always_comb begin
    lk_hit = 1'b0; lk_idx = '0;
    ins_hit = 1'b0; ins_hidx = '0;
    free_any = 1'b0; free_idx = '0;
    hd_valid = 1'b0; hd_idx = '0;
    count = '0;
    for (int i = SIZE - 1; i >= 0; i--) begin
      if (valid[i] && ids[i] == lk_id)  begin lk_hit = 1'b1;  lk_idx = IW'(i);   end
      if (valid[i] && ids[i] == ins_id) begin ins_hit = 1'b1; ins_hidx = IW'(i); end
      if (!valid[i])                    begin free_any = 1'b1; free_idx = IW'(i); end
      if (valid[i])                     begin hd_valid = 1'b1; hd_idx = IW'(i);   end
    end
    for (int i = 0; i < SIZE; i++) count += (IW+1)'(valid[i]);
    ins_ok       = ins_hit || free_any;
    rd_valid     = valid[rd_idx];
    rd_id        = ids[rd_idx];
    rd_data      = data[rd_idx];
    rd_old_valid = oldv[rd_idx];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      valid <= '0;
      oldv  <= '0;
    end else begin
      if (rm_valid)  valid[rm_idx] <= 1'b0;
      if (clr_valid) oldv[clr_idx] <= 1'b0;
      if (ins_valid && !ins_hit && free_any) begin
        valid[free_idx] <= 1'b1;
        oldv[free_idx]  <= ins_old_valid;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (ins_valid && ins_hit) begin
      data[ins_hidx] <= ins_data;
    end else if (ins_valid && free_any) begin
      ids[free_idx]  <= ins_id;
      data[free_idx] <= ins_data;
    end
  end

  // A write-back must never arrive when the stash cannot take it.
  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n)
                                  ins_valid |-> ins_ok);
  a_rm_valid: assert property (@(posedge clk) disable iff (!rst_n)
                               rm_valid |-> valid[rm_idx]);
endmodule
