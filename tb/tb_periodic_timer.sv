// tb_periodic_timer: with enable low the slot is always open; with enable
// high, after each access (start ... done of random length) the slot opens
// exactly PERIOD = 100 cycles after done, and never earlier.
module tb_periodic_timer;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic enable = 0, start = 0, done = 0, slot;
  int checks = 0, failures = 0;

  periodic_timer #(.PERIOD(100)) dut (.*);

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int waited;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    checks++; if (!slot) failures++;
    enable = 1;
    @(negedge clk);
    for (int t = 0; t < 40; t++) begin
      // wait for the slot and count the cycles since the last done
      waited = 0;
      while (!slot) begin @(negedge clk); waited++; end
      if (t > 0) begin
        checks++;
        if (waited != 100) begin failures++; $display("FAIL slot after %0d cycles", waited); end
      end
      start = 1;
      @(negedge clk);
      start = 0;
      repeat ($urandom_range(0, 300)) begin
        @(negedge clk);
        checks++; if (slot) failures++;
      end
      done = 1;
      @(negedge clk);
      done = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
