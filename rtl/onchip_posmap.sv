// onchip_posmap: the final position map, kept in trusted on-chip memory.
//
// It holds the write counters of the blocks of the top PosMap hierarchy
// (the "On-Chip Map" above hierarchy 2 in the paper's example), one counter
// per block.  All counters reset to zero; a zero counter means the block has
// never been written to DRAM, so its contents are all zeros.  Read is
// combinational, a write takes effect at the next clock edge.  ENTRIES is
// derived by the controller from the ORAM geometry (1026 for the default
// 4 GB working set in 8 GB of DRAM).
module onchip_posmap
  import flat_oram_pkg::*;
#(
  parameter int unsigned ENTRIES = 1026,
  localparam int unsigned AW = (ENTRIES > 1) ? $clog2(ENTRIES) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic [AW-1:0] raddr,
  output ctr_t          rdata,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  ctr_t          wdata
);
  ctr_t mem [ENTRIES];

  assign rdata = mem[raddr];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < ENTRIES; i++) mem[i] <= '0;
    end else if (we) begin
      mem[waddr] <= wdata;
    end
  end
endmodule
