// tb_flat_oram_sweep: the design-space sweeps of the evaluation, run at a
// reduced size (2048 data blocks, default 256-entry PLB).
//
// Seven controllers, each with its own DRAM model, run the same workload
// (oram_workload) side by side:
//   u50/u25/u12  physical memory 2x, 4x and 8x the working set (50 %, 25 %
//                and 12.5 % utilisation), stash 100, latency 100;
//   s50/s200     stash of 50 and 200 blocks at 50 % utilisation;
//   l50/l200     DRAM latency of 50 and 200 cycles.
// Besides the data and MAC checks inside each workload, it checks the
// trends the construction implies:
//   - collisions per successful eviction follow u/(1-u) for utilisation u
//     (about 1, 1/3 and 1/7), so they fall with DRAM size;
//   - a smaller stash enters background eviction at least as often;
//   - completion time grows with DRAM latency.
// The thresholds used are this testbench's choice: the ratio at 50 % must
// lie in [0.6, 1.6] and the ratios must be strictly decreasing.
module tb_flat_oram_sweep;
  import flat_oram_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  localparam int K = 7;
  logic   done  [K];
  int     chk   [K];
  int     fail  [K];
  longint cyc   [K];
  stats_t st    [K];
  stats_t st0   [K];

  oram_workload #(.PAW(12))                   u50  (.clk, .rst_n, .done(done[0]), .checks(chk[0]), .failures(fail[0]), .cycles(cyc[0]), .st(st[0]), .st_init(st0[0]));
  oram_workload #(.PAW(13))                   u25  (.clk, .rst_n, .done(done[1]), .checks(chk[1]), .failures(fail[1]), .cycles(cyc[1]), .st(st[1]), .st_init(st0[1]));
  oram_workload #(.PAW(14))                   u12  (.clk, .rst_n, .done(done[2]), .checks(chk[2]), .failures(fail[2]), .cycles(cyc[2]), .st(st[2]), .st_init(st0[2]));
  oram_workload #(.STASH(50), .LOW(24))       s50  (.clk, .rst_n, .done(done[3]), .checks(chk[3]), .failures(fail[3]), .cycles(cyc[3]), .st(st[3]), .st_init(st0[3]));
  oram_workload #(.STASH(200), .LOW(128))     s200 (.clk, .rst_n, .done(done[4]), .checks(chk[4]), .failures(fail[4]), .cycles(cyc[4]), .st(st[4]), .st_init(st0[4]));
  oram_workload #(.LATENCY(50))               l50  (.clk, .rst_n, .done(done[5]), .checks(chk[5]), .failures(fail[5]), .cycles(cyc[5]), .st(st[5]), .st_init(st0[5]));
  oram_workload #(.LATENCY(200))              l200 (.clk, .rst_n, .done(done[6]), .checks(chk[6]), .failures(fail[6]), .cycles(cyc[6]), .st(st[6]), .st_init(st0[6]));

  int checks = 0, failures = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // collisions per successful eviction after start-up placement
  function automatic real coll_ratio(input int i);
    real c, e;
    c = real'(st[i].collisions - st0[i].collisions);
    e = real'(st[i].evictions - st0[i].evictions);
    return (e > 0.0) ? c / e : 0.0;
  endfunction

  initial begin
    repeat (20_000_000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bit all;
    repeat (5) @(posedge clk);
    rst_n = 1'b1;
    do begin
      @(posedge clk);
      all = 1'b1;
      for (int i = 0; i < K; i++) all &= done[i];
    end while (!all);
    for (int i = 0; i < K; i++) begin
      checks += chk[i];
      failures += fail[i];
      $display("config %0d: cycles=%0d evictions=%0d collisions=%0d ratio=%0.3f bg=%0d dram_r=%0d dram_w=%0d",
               i, cyc[i], st[i].evictions - st0[i].evictions,
               st[i].collisions - st0[i].collisions, coll_ratio(i),
               st[i].bg_phases - st0[i].bg_phases, st[i].dram_reads, st[i].dram_writes);
    end
    check(coll_ratio(0) > 0.6 && coll_ratio(0) < 1.6, "collision ratio near 1 at 50% utilisation");
    check(coll_ratio(0) > coll_ratio(1), "fewer collisions at 25% than at 50% utilisation");
    check(coll_ratio(1) > coll_ratio(2), "fewer collisions at 12.5% than at 25% utilisation");
    check(coll_ratio(2) < 0.35, "collision ratio small at 12.5% utilisation");
    check(cyc[0] > cyc[2], "larger DRAM completes the workload faster");
    check(st[3].bg_phases - st0[3].bg_phases > 0, "small stash enters background eviction");
    check(st[3].bg_phases - st0[3].bg_phases >= st[4].bg_phases - st0[4].bg_phases,
          "smaller stash enters background eviction at least as often");
    check(cyc[5] < cyc[0], "50-cycle DRAM faster than 100-cycle");
    check(cyc[0] < cyc[6], "100-cycle DRAM faster than 200-cycle");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
