// oram_workload: test harness that runs one memory workload through a
// flat_oram controller and its DRAM model, and reports what happened.
//
// It is used by tb_flat_oram_sweep to run the same kind of traffic under
// several configurations (DRAM size, stash size, DRAM latency).  After reset
// the harness places all N data blocks (start-up placement), then issues
// WRITES dirty write-backs to random blocks in back-to-back bursts of BURST,
// with one read after every third write-back, waits until the stash has
// drained, and reads SAMPLE random blocks back.  Every read is compared with
// a shadow copy of memory and must pass its MAC check.
//
// Outputs: done rises when the workload has finished; checks and failures
// count the comparisons made; cycles is the number of clock cycles from the
// end of start-up placement to the end of the drain (the workload's
// completion time); st and st_init are the controller's event counters at
// the end and at the end of start-up placement.
module oram_workload
  import flat_oram_pkg::*;
#(
  parameter longint unsigned N       = 2048,
  parameter int unsigned     PAW     = 12,
  parameter int unsigned     STASH   = 100,
  parameter int unsigned     LOW     = 64,
  parameter int unsigned     LATENCY = 100,
  parameter int unsigned     WRITES  = 600,
  parameter int unsigned     BURST   = 60,
  parameter int unsigned     SAMPLE  = 64
) (
  input  logic   clk,
  input  logic   rst_n,
  output logic   done,
  output int     checks,
  output int     failures,
  output longint cycles,
  output stats_t st,
  output stats_t st_init
);
  localparam int unsigned SIW = $clog2(STASH);

  logic [63:0] key = 64'hfeed_f00d_1234_5678;
  logic periodic_en = 1'b0, init_start = 1'b0, init_busy;
  logic rd_req_valid = 1'b0, rd_req_ready;
  id_t  rd_req_addr = '0;
  logic rd_resp_valid, rd_resp_auth_ok;
  blk_t rd_resp_data;
  pa_t  rd_resp_pos;
  logic wb_valid = 1'b0, wb_ready, wb_dirty = 1'b0;
  id_t  wb_addr = '0;
  blk_t wb_data = '0;
  logic dram_req_valid, dram_req_ready, dram_req_we, dram_resp_valid;
  pa_t  dram_req_addr;
  line_t dram_req_wdata, dram_resp_rdata;
  logic [SIW:0] stash_count;
  logic bg_active, integrity_error, stash_overflow;
  stats_t stats;

  flat_oram #(.N_DATA(N), .PHYS_AW(PAW), .STASH_SIZE(STASH), .BE_LOW(LOW)) dut (.*);

  dram_model #(.LATENCY(LATENCY)) u_dram (
    .clk, .rst_n, .req_valid(dram_req_valid), .req_ready(dram_req_ready),
    .req_we(dram_req_we), .req_addr(dram_req_addr), .req_wdata(dram_req_wdata),
    .resp_valid(dram_resp_valid), .resp_rdata(dram_resp_rdata));

  blk_t shadow [longint];

  function automatic blk_t rnd_blk();
    blk_t b;
    for (int i = 0; i < BLOCK_BITS / 32; i++) b[i*32 +: 32] = $urandom;
    return b;
  endfunction

  task automatic check_read(input id_t a);
    blk_t exp;
    @(negedge clk);
    rd_req_valid = 1'b1;
    rd_req_addr  = a;
    do @(posedge clk); while (!rd_req_ready);
    @(negedge clk);
    rd_req_valid = 1'b0;
    while (!rd_resp_valid) @(negedge clk);
    exp = shadow.exists(longint'(a)) ? shadow[longint'(a)] : '0;
    checks += 2;
    if (rd_resp_data != exp) begin
      failures++;
      $display("FAIL: workload PAW=%0d STASH=%0d LAT=%0d: data of block %0d",
               PAW, STASH, LATENCY, a);
    end
    if (!rd_resp_auth_ok) begin
      failures++;
      $display("FAIL: workload PAW=%0d STASH=%0d LAT=%0d: MAC of block %0d",
               PAW, STASH, LATENCY, a);
    end
  endtask

  task automatic do_wb(input id_t a, input blk_t d);
    @(negedge clk);
    wb_valid = 1'b1;
    wb_addr  = a;
    wb_data  = d;
    wb_dirty = 1'b1;
    do @(posedge clk); while (!wb_ready);
    shadow[longint'(a)] = d;
    @(negedge clk);
    wb_valid = 1'b0;
  endtask

  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    longint t0;
    id_t a;
    done = 1'b0;
    checks = 0;
    failures = 0;
    cycles = 0;
    st_init = '0;
    st = '0;
    @(posedge rst_n);
    repeat (2) @(posedge clk);
    @(negedge clk); init_start = 1'b1;
    @(negedge clk); init_start = 1'b0;
    while (init_busy || stash_count != 0 || !rd_req_ready) @(negedge clk);
    st_init = stats;
    t0 = cyc;
    for (int w = 0; w < int'(WRITES); w++) begin
      a = id_t'($urandom_range(0, int'(N) - 1));
      do_wb(a, rnd_blk());
      if (w % 3 == 2) check_read(id_t'($urandom_range(0, int'(N) - 1)));
      if (w % int'(BURST) == int'(BURST) - 1) repeat (200) @(negedge clk);
    end
    while (stash_count != 0 || !rd_req_ready) @(negedge clk);
    cycles = cyc - t0;
    for (int i = 0; i < int'(SAMPLE); i++) check_read(id_t'($urandom_range(0, int'(N) - 1)));
    checks++;
    if (stash_overflow) begin
      failures++;
      $display("FAIL: workload PAW=%0d STASH=%0d: stash overflow", PAW, STASH);
    end
    st = stats;
    done = 1'b1;
  end
endmodule
