// tb_bg_evict: drives a stash occupancy that rises to full and drains again
// and checks the hysteresis: active from count >= 84 (100 - 16 reserved)
// until count <= 64, one enter pulse per phase, and write-back room only
// below 84.
module tb_bg_evict;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [7:0] count = 0;
  logic active, wb_room, enter;
  int checks = 0, failures = 0, enters = 0;

  bg_evict #(.SIZE(100), .RESERVE(16), .LOW(64)) dut (.*);

  always @(posedge clk) if (enter) enters++;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bit exp_active;
    exp_active = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int cycle = 0; cycle < 3; cycle++) begin
      for (int c = 50; c <= 95; c++) begin
        @(negedge clk);
        count = 8'(c);
        #1;
        checks++; if (wb_room != (c < 84)) failures++;
        @(posedge clk); #1;
        if (c >= 84) exp_active = 1;
        checks++; if (active != exp_active) begin failures++; $display("FAIL up c=%0d", c); end
      end
      for (int c = 95; c >= 40; c--) begin
        @(negedge clk);
        count = 8'(c);
        @(posedge clk); #1;
        if (c <= 64) exp_active = 0;
        checks++; if (active != exp_active) begin failures++; $display("FAIL down c=%0d", c); end
      end
    end
    checks++; if (enters != 3) begin failures++; $display("FAIL enters=%0d", enters); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
