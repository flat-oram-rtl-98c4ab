// tb_pmmac: checks the tag against the reference MAC, that the matching tag
// is accepted, and that a flipped data bit, a different counter (a replayed
// older version) or a different block id is rejected.
module tb_pmmac;
  import flat_oram_pkg::*;
  import tb_ref_pkg::*;
  logic [63:0] key;
  id_t id;
  ctr_t ctr;
  blk_t data;
  mac_t mac_in, mac_out;
  logic ok;
  int checks = 0, failures = 0;

  pmmac dut (.key, .id, .ctr, .data, .mac_in, .mac_out, .ok);

  task automatic chk(input bit c, input string s);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", s); end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    mac_t good;
    int bitpos;
    key = {$urandom, $urandom};
    for (int t = 0; t < 100; t++) begin
      id = $urandom; ctr = $urandom;
      for (int w = 0; w < 32; w++) data[w*32 +: 32] = $urandom;
      mac_in = '0;
      #1;
      good = ref_mac(key, id, ctr, data);
      chk(mac_out == good, "tag matches reference");
      mac_in = good;
      #1;
      chk(ok, "good tag accepted");
      bitpos = $urandom_range(0, 1023);
      data[bitpos] ^= 1'b1;
      #1;
      chk(!ok, "tampered data rejected");
      data[bitpos] ^= 1'b1;
      #1;
      chk(ok, "restored data accepted");
      ctr = ctr - 1;
      #1;
      chk(!ok, "stale counter rejected");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
