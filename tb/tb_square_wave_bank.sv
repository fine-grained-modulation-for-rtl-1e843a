// Testbench for square_wave_bank: every wave output is compared, clock by
// clock, with a square wave computed from its frequency and initial phase in
// the published wave table (f_shift +/- 500 kHz; phases 0, pi/2, pi, 3pi/2 and
// 0, 3pi/2, pi, pi/2). A wave is expected high while
// (f * t + phi/2pi) mod 1 < 1/2, with t counted from the last restart. Chip
// restarts come at the nominal 50-clock spacing and at irregular times.
module tb_square_wave_bank;
  logic clk = 0, rst_n = 0, chip_last = 0;
  logic [7:0] waves;
  int checks = 0, failures = 0;

  // frequencies in Hz and quarter-turn phases of waves #0..#7
  longint freq [8] = '{10_500_000, 10_500_000, 10_500_000, 10_500_000,
                        9_500_000,  9_500_000,  9_500_000,  9_500_000};
  int     quart[8] = '{0, 1, 2, 3, 0, 3, 2, 1};
  longint tcount = 0;   // clocks since restart

  square_wave_bank dut (.clk, .rst_n, .chip_last, .waves);

  always #5 clk = ~clk;

  function automatic logic expect_wave(int k, longint t);
    // phase in units of 1/(4*F_CLK) of a turn
    longint num;
    num = (4 * freq[k] * t + longint'(quart[k]) * 100_000_000) % 400_000_000;
    return num < 200_000_000;
  endfunction

  task automatic run(int cycles, int period);
    for (int c = 0; c < cycles; c++) begin
      // called at a falling edge: outputs are settled
      for (int k = 0; k < 8; k++) begin
        checks++;
        if (waves[k] !== expect_wave(k, tcount)) begin
          failures++;
          if (failures < 10) $display("FAIL: wave %0d t=%0d got %b", k, tcount, waves[k]);
        end
      end
      chip_last = ((tcount + 1) % period == 0);
      @(posedge clk);
      tcount = chip_last ? 0 : tcount + 1;
      @(negedge clk);
      chip_last = 0;
    end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1;
    run(500, 50);          // ten nominal chips
    run(300, 37);          // irregular restarts
    run(400, 1000);        // long free run: wraps of the accumulators
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
