// periodic_timer: access-slot generator for the periodic (timing-protected)
// mode.
//
// In periodic mode the controller may start an ORAM access only when `slot`
// is high, and it must start one then (a dummy access if it has no real
// work), so a DRAM write appears once per period whatever the program does.
// The timer counts the cycles since the controller reported the end of its
// previous access (`done`) and raises `slot` once PERIOD cycles have passed;
// `start` acknowledges the slot.  Measuring the period from the end of the
// previous access is this design's reading of "regular periodic intervals".
// Default PERIOD is the paper's 100 cycles.  With `enable` low the timer is
// idle and `slot` is always high.
module periodic_timer #(
  parameter int unsigned PERIOD = 100,
  localparam int unsigned CW = $clog2(PERIOD + 1)
) (
  input  logic clk,
  input  logic rst_n,
  input  logic enable,
  input  logic start,   // an access begins this cycle
  input  logic done,    // the access ends this cycle
  output logic slot
);
  logic [CW-1:0] cnt;
  logic          busy;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt  <= '0;
      busy <= 1'b0;
    end else if (!enable) begin
      cnt  <= '0;
      busy <= 1'b0;
    end else if (start) begin
      busy <= 1'b1;
      cnt  <= '0;
    end else if (done) begin
      busy <= 1'b0;
      cnt  <= '0;
    end else if (!busy && cnt != CW'(PERIOD)) begin
      cnt <= cnt + 1'b1;
    end
  end

  assign slot = !enable || (!busy && cnt == CW'(PERIOD));
endmodule
