// tb_occmap_bit: for random OccMap blocks and locations, the reported bit is
// bit (s mod 1024) of the block, and set/clear change exactly that bit.
module tb_occmap_bit;
  import flat_oram_pkg::*;
  blk_t blk_in, blk_out;
  pa_t pos;
  logic set, occupied;
  int checks = 0, failures = 0;

  occmap_bit dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 3000; t++) begin
      blk_t expb;
      int off;
      for (int w = 0; w < 32; w++) blk_in[w*32 +: 32] = $urandom;
      pos = $urandom;
      set = $urandom;
      #1;
      off = pos % 1024;
      expb = blk_in;
      expb[off] = set;
      checks++;
      if (occupied != blk_in[off]) failures++;
      checks++;
      if (blk_out != expb) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
