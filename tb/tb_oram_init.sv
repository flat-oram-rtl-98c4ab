// tb_oram_init: after start, the engine offers data blocks 0..N-1 in order,
// each once, with all-zero contents, holding an offer while wb_ready is low,
// and drops busy after the last one.
module tb_oram_init;
  import flat_oram_pkg::*;
  localparam longint unsigned N = 300;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start = 0, busy, wb_valid, wb_ready = 0;
  id_t wb_id;
  blk_t wb_data;
  int checks = 0, failures = 0;

  oram_init #(.N_DATA(N)) dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int expected;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    checks++; if (busy || wb_valid) failures++;
    start = 1;
    @(negedge clk);
    start = 0;
    expected = 0;
    while (busy) begin
      wb_ready = $urandom_range(0, 1);
      #1;
      checks++;
      if (!wb_valid || wb_id != id_t'(expected) || wb_data != '0) begin
        failures++;
        $display("FAIL offer %0d got %0d", expected, wb_id);
      end
      @(posedge clk);
      if (wb_ready) expected++;
      @(negedge clk);
    end
    checks++;
    if (expected != int'(N)) begin failures++; $display("FAIL %0d blocks offered", expected); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
