// tb_flat_oram: end-to-end test of the Flat ORAM controller at a reduced size.
//
// Geometry: 2048 data blocks in 4096 physical blocks (the paper's 50 %
// utilisation), a 16-entry PLB so that PosMap/OccMap blocks are displaced,
// and a 40-block stash so that background eviction is reached.  DRAM has a
// 10-cycle latency to keep the run short.
//
// Phases: (1) start-up placement of all data blocks (Algorithm 1);
// (2) random reads and dirty/clean write-backs checked against a shadow
// copy of memory, including bursts that fill the stash; (3) a tampered DRAM
// line must fail the MAC check; (4) periodic mode: accesses must start at
// least PERIOD cycles apart and each must write DRAM.  At the end every
// data block is read back.  Each mechanism (collision, eviction, stash read
// hit, PLB victim, stash pull, background eviction, dummy rewrite, clean
// drop, integrity failure) must have happened at least once.
module tb_flat_oram;
  import flat_oram_pkg::*;

  localparam longint unsigned N = 2048;
  localparam int unsigned PAW = 12;
  localparam int unsigned PER = 40;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic [63:0] key = 64'h0123_4567_89ab_cdef;
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
  logic [6:0] stash_count;
  logic bg_active, integrity_error, stash_overflow;
  stats_t stats;

  flat_oram #(.N_DATA(N), .PHYS_AW(PAW), .PLB_ENTRIES(16), .STASH_SIZE(40),
              .PERIOD(PER), .BE_RESERVE(16), .BE_LOW(8)) dut (.*);

  dram_model #(.LATENCY(10)) u_dram (
    .clk, .rst_n, .req_valid(dram_req_valid), .req_ready(dram_req_ready),
    .req_we(dram_req_we), .req_addr(dram_req_addr), .req_wdata(dram_req_wdata),
    .resp_valid(dram_resp_valid), .resp_rdata(dram_resp_rdata));

  int checks = 0, failures = 0;
  blk_t shadow [longint];

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  function automatic blk_t rnd_blk();
    blk_t b;
    for (int i = 0; i < BLOCK_BITS / 32; i++) b[i*32 +: 32] = $urandom;
    return b;
  endfunction

  function automatic blk_t expect_of(input longint a);
    return shadow.exists(a) ? shadow[a] : '0;
  endfunction

  task automatic do_read(input id_t a, output blk_t d, output logic ok, output pa_t pos);
    @(negedge clk);
    rd_req_valid = 1'b1;
    rd_req_addr  = a;
    do @(posedge clk); while (!rd_req_ready);
    @(negedge clk);
    rd_req_valid = 1'b0;
    while (!rd_resp_valid) @(negedge clk);
    d = rd_resp_data;
    ok = rd_resp_auth_ok;
    pos = rd_resp_pos;
  endtask

  task automatic check_read(input id_t a);
    blk_t d; logic ok; pa_t p;
    do_read(a, d, ok, p);
    check(d == expect_of(longint'(a)), $sformatf("read data of block %0d", a));
    check(ok, $sformatf("MAC of block %0d", a));
  endtask

  task automatic do_wb(input id_t a, input blk_t d, input logic dirty);
    @(negedge clk);
    wb_valid = 1'b1;
    wb_addr  = a;
    wb_data  = d;
    wb_dirty = dirty;
    do @(posedge clk); while (!wb_ready);
    if (dirty) shadow[longint'(a)] = d;
    @(negedge clk);
    wb_valid = 1'b0;
  endtask

  task automatic wait_drain();
    while (stash_count != 0 || !rd_req_ready) @(negedge clk);
  endtask

  // periodic-mode monitor
  longint cyc = 0, last_done = 0, starts_checked = 0;
  int     acc_writes = 0;
  bit     in_acc = 0;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (periodic_en && dut.acc_start) begin
      if (starts_checked > 0 && cyc - last_done < longint'(PER)) begin
        failures++;
        $display("FAIL: periodic access started %0d cycles after the previous one", cyc - last_done);
      end
      starts_checked <= starts_checked + 1;
      checks++;
    end
    if (periodic_en && dut.acc_done) begin
      last_done <= cyc;
    end
  end

  // count DRAM writes per periodic access
  int periodic_accesses = 0, periodic_silent = 0;
  always @(posedge clk) begin
    if (periodic_en && dut.acc_start) begin
      in_acc <= 1;
      acc_writes <= 0;
    end else if (in_acc && dram_req_valid && dram_req_ready && dram_req_we) begin
      acc_writes <= acc_writes + 1;
    end
    if (periodic_en && dut.acc_done && in_acc) begin
      in_acc <= 0;
      periodic_accesses <= periodic_accesses + 1;
      if (acc_writes == 0 && !(dram_req_valid && dram_req_ready && dram_req_we))
        periodic_silent <= periodic_silent + 1;
    end
  end

  // watchdog
  initial begin
    repeat (3_000_000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    blk_t d; logic ok; pa_t p; line_t l;
    repeat (5) @(posedge clk);
    rst_n = 1'b1;
    repeat (2) @(posedge clk);

    // (1) start-up placement
    @(negedge clk); init_start = 1'b1;
    @(negedge clk); init_start = 1'b0;
    while (init_busy) @(negedge clk);
    wait_drain();
    check(longint'(stats.evictions) >= longint'(N), "every data block placed at start-up");
    check(u_dram.n_writes >= N, "start-up wrote every block");

    // (2) random traffic
    for (int it = 0; it < 1500; it++) begin
      int op;
      id_t a;
      op = $urandom_range(0, 9);
      a  = id_t'($urandom_range(0, int'(N) - 1));
      if (op < 4)      check_read(a);
      else if (op < 8) do_wb(a, rnd_blk(), 1'b1);
      else if (op < 9) do_wb(a, '0, 1'b0);
      else begin
        // read-modify-write hitting the stash
        do_wb(a, rnd_blk(), 1'b1);
        check_read(a);
      end
    end
    // a burst that fills the stash: write-backs only
    for (int it = 0; it < 120; it++)
      do_wb(id_t'(it * 7), rnd_blk(), 1'b1);
    // the most recent write-backs are still parked in the stash
    for (int it = 119; it > 112; it--) check_read(id_t'(it * 7));
    // reads while background eviction may be active
    for (int it = 0; it < 50; it++) check_read(id_t'($urandom_range(0, int'(N) - 1)));
    wait_drain();

    // (3) tamper with one line: flip a data bit of block 5's DRAM copy
    do_read(5, d, ok, p);
    check(ok && d == expect_of(5) && p != '1, "block 5 read from DRAM");
    l = u_dram.peek(p);
    u_dram.poke(p, l ^ line_t'(1));
    do_read(5, d, ok, p);
    check(!ok, "tampered line fails the MAC check");
    check(integrity_error, "integrity error flag raised");
    u_dram.poke(p, l);
    do_read(5, d, ok, p);
    check(ok && d == expect_of(5), "restored line passes");

    // (4) periodic mode
    periodic_en = 1'b1;
    for (int it = 0; it < 60; it++) begin
      int op;
      id_t a;
      op = $urandom_range(0, 2);
      a  = id_t'($urandom_range(0, int'(N) - 1));
      if (op == 0) check_read(a);
      else if (op == 1) do_wb(a, rnd_blk(), 1'b1);
      else repeat ($urandom_range(50, 200)) @(negedge clk);
    end
    repeat (400) @(negedge clk);
    periodic_en = 1'b0;
    check(periodic_silent == 0, $sformatf("every periodic access writes DRAM (%0d silent of %0d)",
                                          periodic_silent, periodic_accesses));
    wait_drain();

    // final sweep: every data block reads back its latest value
    for (int a = 0; a < int'(N); a++) check_read(id_t'(a));

    check(!stash_overflow, "stash never overflowed");
    $display("mechanisms: reads=%0d stash_hits=%0d evictions=%0d collisions=%0d plb_hits=%0d plb_fills=%0d dirty_victims=%0d pulls=%0d bg=%0d dummy=%0d clean=%0d mac_fail=%0d dram_r=%0d dram_w=%0d",
             stats.reads, stats.stash_read_hits, stats.evictions, stats.collisions,
             stats.plb_hits, stats.plb_fills, stats.plb_dirty_victims, stats.stash_pulls,
             stats.bg_phases, stats.dummy_rewrites, stats.clean_drops, stats.integrity_fails,
             stats.dram_reads, stats.dram_writes);
    check(stats.collisions > 0, "collision handling happened");
    check(stats.evictions > 0, "stash eviction happened");
    check(stats.stash_read_hits > 0, "read served from the stash");
    check(stats.plb_hits > 0, "PLB hit happened");
    check(stats.plb_dirty_victims > 0, "dirty PLB victim moved to the stash");
    check(stats.stash_pulls > 0, "PLB fill served from the stash");
    check(stats.bg_phases > 0, "background eviction happened");
    check(stats.dummy_rewrites > 0, "periodic dummy rewrite happened");
    check(stats.clean_drops > 0, "clean write-back dropped");
    check(stats.integrity_fails > 0, "integrity failure detected");
    // collision rate near the utilisation (about 1/2 at 50 %)
    check(stats.collisions < 2 * stats.evictions, "collision count consistent with 50% utilisation");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
