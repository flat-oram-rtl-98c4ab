// tb_pos_gen: checks the position generator against the reference PRF for
// random ids and counters, that positions stay inside the 2**PHYS_AW
// physical blocks, that a counter increment moves the block, and that
// positions spread evenly over 16 address ranges (uniform random choice).
module tb_pos_gen;
  import flat_oram_pkg::*;
  import tb_ref_pkg::*;
  localparam int unsigned AW = 26;
  logic [63:0] key;
  id_t id;
  ctr_t ctr;
  pa_t pos;
  int checks = 0, failures = 0;
  int bucket [16];

  pos_gen #(.PHYS_AW(AW)) dut (.key, .id, .ctr, .pos);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    pa_t p0;
    key = {$urandom, $urandom};
    foreach (bucket[i]) bucket[i] = 0;
    for (int i = 0; i < 4000; i++) begin
      id = $urandom; ctr = $urandom;
      #1;
      checks++;
      if (64'(pos) != ref_pos(key, id, ctr, AW)) begin
        failures++;
        if (failures < 5) $display("FAIL pos id=%0d ctr=%0d got %0d", id, ctr, pos);
      end
      checks++;
      if (pos >= (32'd1 << AW)) failures++;
      bucket[pos[AW-1 -: 4]]++;
      p0 = pos;
      ctr = ctr + 1;
      #1;
      checks++;
      if (pos == p0) failures++;
    end
    foreach (bucket[i]) begin
      checks++;
      if (bucket[i] < 180 || bucket[i] > 320) begin
        failures++;
        $display("FAIL bucket %0d has %0d", i, bucket[i]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
