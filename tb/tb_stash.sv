// tb_stash: random inserts (new ids and updates of present ids), removes,
// old-location clears and lookups, compared every cycle with a reference
// model kept in an associative array.  Also fills the stash to capacity and
// checks ins_ok, count and the head slot.
module tb_stash;
  import flat_oram_pkg::*;
  localparam int unsigned SIZE = 100;
  localparam int unsigned IW = $clog2(SIZE);
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic ins_valid = 0, ins_old_valid = 0, ins_ok;
  id_t  ins_id = 0, lk_id = 0, rd_id;
  blk_t ins_data = 0, rd_data;
  logic lk_hit, rd_valid, rd_old_valid, rm_valid = 0, clr_valid = 0, hd_valid;
  logic [IW-1:0] lk_idx, rd_idx = 0, rm_idx = 0, clr_idx = 0, hd_idx;
  logic [IW:0] count;
  int checks = 0, failures = 0;

  stash #(.SIZE(SIZE)) dut (.*);

  blk_t mdata [int unsigned];
  bit   mold  [int unsigned];

  task automatic chk(input bit c, input string s);
    checks++;
    if (!c) begin failures++; if (failures < 10) $display("FAIL %s", s); end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    id_t a;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    chk(count == 0 && !hd_valid, "empty after reset");
    for (int t = 0; t < 5000; t++) begin
      int op;
      op = $urandom_range(0, 3);
      a = $urandom_range(0, 150);
      @(negedge clk);
      lk_id = a;
      ins_id = a;
      #1;
      rd_idx = lk_idx;
      #1;
      chk(lk_hit == mdata.exists(a), $sformatf("lookup hit of %0d", a));
      if (lk_hit) begin
        chk(rd_valid && rd_id == a && rd_data == mdata[a] && rd_old_valid == mold[a],
            $sformatf("slot contents of %0d", a));
      end
      chk(count == mdata.num(), "count");
      chk(ins_ok == (mdata.exists(a) || mdata.num() < SIZE), "ins_ok");
      if (op <= 1 && ins_ok) begin
        ins_valid = 1; ins_id = a; ins_data = {32{$urandom}}; ins_old_valid = $urandom;
        if (!mdata.exists(a)) mold[a] = ins_old_valid;
        mdata[a] = ins_data;
      end else if (op == 2 && lk_hit && rd_valid && mdata.exists(a)) begin
        rm_valid = 1; rm_idx = lk_idx;
        mdata.delete(a); mold.delete(a);
      end else if (op == 3 && lk_hit && rd_valid && mdata.exists(a)) begin
        clr_valid = 1; clr_idx = lk_idx;
        mold[a] = 0;
      end
      @(posedge clk);
      #1;
      ins_valid = 0; rm_valid = 0; clr_valid = 0;
    end
    // head is the lowest occupied slot
    @(negedge clk);
    chk(hd_valid == (mdata.num() != 0), "head valid");
    rd_idx = hd_idx;
    #1;
    chk(rd_valid, "head slot occupied");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
