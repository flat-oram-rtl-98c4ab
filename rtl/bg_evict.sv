// bg_evict: background-eviction control.
//
// When the stash fills up, the controller stops serving read requests (which
// in turn stops new write-backs) and spends its time evicting blocks from the
// stash to random vacant locations until the occupancy has fallen to a safe
// threshold.  This unit is the hysteresis that decides when: `active` rises
// when count >= HIGH and falls when count <= LOW.  HIGH is the stash size
// minus RESERVE slots kept free for dirty PLB blocks that an access in
// flight may still displace into the stash; wb_room tells the write-back
// port whether a new block may enter.  RESERVE and LOW are this design's
// choices; the paper only says "full" and "a safe threshold".
//
// `active` is registered: it changes one cycle after count crosses a bound.
module bg_evict #(
  parameter int unsigned SIZE    = 100,
  parameter int unsigned RESERVE = 16,
  parameter int unsigned LOW     = 64,
  localparam int unsigned CW = $clog2(SIZE) + 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic [CW-1:0] count,
  output logic          active,
  output logic          wb_room,
  output logic          enter      // pulse: a background-eviction phase starts
);
  localparam int unsigned HIGH = SIZE - RESERVE;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                                active <= 1'b0;
    else if (!active && count >= CW'(HIGH))    active <= 1'b1;
    else if (active && count <= CW'(LOW))      active <= 1'b0;
  end

  assign enter   = !active && count >= CW'(HIGH);
  assign wb_room = count < CW'(HIGH);
endmodule
