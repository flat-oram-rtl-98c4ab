// tb_onchip_posmap: all counters read zero after reset; random writes are
// read back from a reference copy.
module tb_onchip_posmap;
  import flat_oram_pkg::*;
  localparam int unsigned E = 1026;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [10:0] raddr = 0, waddr = 0;
  ctr_t rdata, wdata = 0;
  logic we = 0;
  int checks = 0, failures = 0;
  ctr_t m [E];

  onchip_posmap #(.ENTRIES(E)) dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < E; i++) begin
      m[i] = 0;
      raddr = 11'(i);
      #1;
      checks++;
      if (rdata != 0) failures++;
    end
    for (int t = 0; t < 5000; t++) begin
      @(negedge clk);
      raddr = 11'($urandom_range(0, E - 1));
      #1;
      checks++;
      if (rdata != m[raddr]) failures++;
      we = $urandom;
      waddr = 11'($urandom_range(0, E - 1));
      wdata = $urandom;
      if (we) m[waddr] = wdata;
      @(posedge clk);
      #1;
      we = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
