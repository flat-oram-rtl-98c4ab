// tb_plb: random fills, data writes and lookups of a 32-entry PLB compared
// with a reference model of a direct-mapped cache (index = id mod 32):
// hits, returned data, the victim shown for an index (its id, dirty and
// old-location flags) and the dirty bit set by a data write.
module tb_plb;
  import flat_oram_pkg::*;
  localparam int unsigned E = 32;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  id_t  lk_id = 0, fill_id = 0, wr_id = 0, vic_id;
  logic lk_hit, vic_valid, vic_dirty, vic_old_valid;
  blk_t lk_data, fill_data = 0, wr_data = 0;
  logic fill_valid = 0, fill_dirty = 0, fill_old_valid = 0, wr_valid = 0;
  int checks = 0, failures = 0;

  plb #(.ENTRIES(E)) dut (.*);

  bit   mv [E];
  bit   md [E];
  bit   mo [E];
  id_t  mt [E];
  blk_t mdat [E];

  task automatic chk(input bit c, input string s);
    checks++;
    if (!c) begin failures++; if (failures < 10) $display("FAIL %s", s); end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    foreach (mv[i]) begin mv[i] = 0; md[i] = 0; mo[i] = 0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 4000; t++) begin
      id_t a;
      int ix;
      int op;
      a = $urandom_range(0, 200);
      ix = a % E;
      op = $urandom_range(0, 2);
      @(negedge clk);
      lk_id = a;
      #1;
      chk(lk_hit == (mv[ix] && mt[ix] == a), "hit");
      chk(vic_valid == mv[ix], "victim valid");
      if (mv[ix]) begin
        chk(vic_id == mt[ix] && vic_dirty == md[ix] && vic_old_valid == mo[ix], "victim tag/flags");
        chk(lk_data == mdat[ix], "data");
      end
      if (op == 0) begin
        fill_valid = 1; fill_id = a; fill_data = {32{$urandom}};
        fill_dirty = $urandom; fill_old_valid = $urandom;
        mv[ix] = 1; mt[ix] = a; mdat[ix] = fill_data; md[ix] = fill_dirty; mo[ix] = fill_old_valid;
      end else if (op == 1 && lk_hit && mv[ix] && mt[ix] == a) begin
        wr_valid = 1; wr_id = a; wr_data = {32{$urandom}};
        mdat[ix] = wr_data; md[ix] = 1;
      end
      @(posedge clk);
      #1;
      fill_valid = 0; wr_valid = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
