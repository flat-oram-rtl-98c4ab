// tb_flat_oram_full: the controller at its default size (4 GB working set in
// 8 GB of DRAM, 128-byte blocks, 32 KB PLB, 100-block stash, 100-cycle DRAM).
//
// Start-up placement of all 2**25 blocks is not simulated; blocks that were
// never written read as zeros.  The test writes back a few dirty blocks,
// waits until the stash has placed them at random vacant locations, and
// reads them back through the four-level position map, checking the data,
// the MAC and that the returned position is where DRAM was written.  It also
// reads a never-written block (all zeros, no DRAM access).  Finally it runs
// periodic mode with the default 100-cycle period for 2000 cycles with one
// read in it: accesses must start no sooner than 100 cycles after the
// previous one ended, each must write DRAM (dummy rewrites when idle), and
// the read must still return the right data.
module tb_flat_oram_full;
  import flat_oram_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic [63:0] key = 64'hfeed_beef_1234_5678;
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
  logic [7:0] stash_count;
  logic bg_active, integrity_error, stash_overflow;
  stats_t stats;

  flat_oram dut (.*);

  dram_model #(.LATENCY(100)) u_dram (
    .clk, .rst_n, .req_valid(dram_req_valid), .req_ready(dram_req_ready),
    .req_we(dram_req_we), .req_addr(dram_req_addr), .req_wdata(dram_req_wdata),
    .resp_valid(dram_resp_valid), .resp_rdata(dram_resp_rdata));

  int checks = 0, failures = 0;
  longint cycles = 0;
  always @(posedge clk) cycles <= cycles + 1;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (2_000_000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  id_t  addrs [4] = '{id_t'(0), id_t'(12345), id_t'(33554431), id_t'(777777)};
  blk_t vals  [4];

  // periodic-mode monitor: accesses started and the smallest gap between
  // the end of one access and the start of the next
  int     p_acc = 0;
  longint p_gap = 64'h7fff_ffff, p_last = -1;
  always @(posedge clk) begin
    if (periodic_en && dut.acc_start) begin
      p_acc <= p_acc + 1;
      if (p_last >= 0 && cycles - p_last < p_gap) p_gap <= cycles - p_last;
    end
    if (periodic_en && dut.acc_done) p_last <= cycles;
  end

  initial begin
    longint t0;
    logic [31:0] d0, w0, e0;
    repeat (5) @(posedge clk);
    rst_n = 1'b1;
    repeat (2) @(posedge clk);
    for (int i = 0; i < 4; i++) begin
      for (int w = 0; w < BLOCK_BITS / 32; w++) vals[i][w*32 +: 32] = $urandom;
      @(negedge clk);
      wb_valid = 1'b1; wb_addr = addrs[i]; wb_data = vals[i]; wb_dirty = 1'b1;
      do @(posedge clk); while (!wb_ready);
      @(negedge clk);
      wb_valid = 1'b0;
    end
    t0 = cycles;
    while (stash_count != 0 || !rd_req_ready) @(negedge clk);
    $display("stash drained after %0d cycles: evictions=%0d collisions=%0d dram_r=%0d dram_w=%0d",
             cycles - t0, stats.evictions, stats.collisions, stats.dram_reads, stats.dram_writes);
    for (int i = 0; i < 4; i++) begin
      @(negedge clk);
      rd_req_valid = 1'b1; rd_req_addr = addrs[i];
      do @(posedge clk); while (!rd_req_ready);
      @(negedge clk);
      rd_req_valid = 1'b0;
      while (!rd_resp_valid) @(negedge clk);
      check(rd_resp_data == vals[i], $sformatf("data of block %0d", addrs[i]));
      check(rd_resp_auth_ok, "MAC verified");
      check(rd_resp_pos != '1 && rd_resp_pos < (32'd1 << 26), "position inside DRAM");
      check(u_dram.mem.exists(rd_resp_pos), "block read from a written location");
    end
    // never-written block
    @(negedge clk);
    rd_req_valid = 1'b1; rd_req_addr = 42;
    do @(posedge clk); while (!rd_req_ready);
    @(negedge clk);
    rd_req_valid = 1'b0;
    while (!rd_resp_valid) @(negedge clk);
    check(rd_resp_data == '0 && rd_resp_auth_ok, "unwritten block reads as zeros");
    check(stats.evictions >= 4, "blocks evicted");
    // periodic mode at the default period
    d0 = stats.dummy_rewrites;
    e0 = stats.evictions;
    w0 = stats.dram_writes;
    @(negedge clk);
    periodic_en = 1'b1;
    repeat (1000) @(negedge clk);
    rd_req_valid = 1'b1; rd_req_addr = addrs[1];
    do @(posedge clk); while (!rd_req_ready);
    @(negedge clk);
    rd_req_valid = 1'b0;
    while (!rd_resp_valid) @(negedge clk);
    check(rd_resp_data == vals[1] && rd_resp_auth_ok, "read in periodic mode");
    repeat (1000) @(negedge clk);
    periodic_en = 1'b0;
    $display("periodic: accesses=%0d min_gap=%0d dummy=%0d evictions=%0d dram_w=%0d", p_acc, p_gap,
             stats.dummy_rewrites - d0, stats.evictions - e0, stats.dram_writes - w0);
    check(p_acc >= 3 && p_acc <= 20, $sformatf("at most one access per period (%0d)", p_acc));
    check(p_gap >= 100, $sformatf("accesses at least 100 cycles apart (%0d)", p_gap));
    // each access either evicts a stash block or rewrites a random location
    check(stats.dummy_rewrites - d0 + stats.evictions - e0 >= p_acc,
          "every periodic slot evicts or issues a dummy rewrite");
    check(stats.dummy_rewrites - d0 > 0, "idle periods issue dummy rewrites");
    check(stats.dram_writes - w0 >= p_acc, "every periodic access writes DRAM");
    check(!stash_overflow && !integrity_error, "no overflow, no integrity error");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
