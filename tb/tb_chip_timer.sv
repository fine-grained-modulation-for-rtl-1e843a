// Testbench for chip_timer: the chip strobe must come every 50 clocks
// (0.5 us at 100 MHz) and a sync pulse must restart the chip so that the next
// strobe comes 50 clocks after it.
module tb_chip_timer;
  logic clk = 0, rst_n = 0, sync = 0;
  logic chip_last;
  logic [5:0] chip_cnt;
  int checks = 0, failures = 0;
  int cyc = 0, last_strobe = -1, sync_at = -1;

  chip_timer dut (.clk, .rst_n, .sync, .chip_last, .chip_cnt);

  always #5 clk = ~clk;

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n && chip_last) begin
      if (sync_at >= 0) begin
        checks++;
        if (cyc - sync_at != 50) begin
          failures++;
          $display("FAIL: strobe %0d cycles after sync", cyc - sync_at);
        end
        sync_at = -1;
      end else if (last_strobe >= 0) begin
        checks++;
        if (cyc - last_strobe != 50) begin
          failures++;
          $display("FAIL: chip period %0d cycles", cyc - last_strobe);
        end
      end
      last_strobe = cyc;
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    repeat (520) @(posedge clk);
    // Re-align in the middle of a chip, then twice more at random points.
    for (int i = 0; i < 3; i++) begin
      @(negedge clk); sync = 1;
      @(negedge clk); sync = 0;
      sync_at = cyc - 1;
      last_strobe = -1;
      repeat (200 + $urandom_range(0, 60)) @(posedge clk);
    end
    repeat (10) @(posedge clk);
    if (checks < 12) begin failures++; $display("FAIL: too few strobes"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
