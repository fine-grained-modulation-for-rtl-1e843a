// Testbench for fps_controller. Random chip directions are offered at chip
// boundaries (with gaps). For every chip the selected wave must have the
// right frequency (f_shift + f_FP for +pi/2, f_shift - f_FP for -pi/2) and an
// initial phase equal to the phase accumulated so far, using the wave table
// numbering (#0..#3: 0, pi/2, pi, 3pi/2; #4..#7: 0, 3pi/2, pi, pi/2). The
// published example, a step from pi/2 to pi, must pick wave #1.
module tb_fps_controller;
  logic clk = 0, rst_n = 0, chip_last = 0, chip_valid = 0, chip_dir = 0;
  logic chip_ready, active;
  logic [2:0] wave_sel;
  logic [1:0] phase_q;
  int checks = 0, failures = 0;
  int quart[8] = '{0, 1, 2, 3, 0, 3, 2, 1};
  int acc = 0;           // reference accumulated phase, quarter turns
  bit was_active = 0;
  int seen_ex = 0;

  fps_controller dut (.clk, .rst_n, .chip_last, .chip_valid, .chip_dir,
                      .chip_ready, .active, .wave_sel, .phase_q);

  always #5 clk = ~clk;

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1;
    for (int chip = 0; chip < 400; chip++) begin
      bit offer, d;
      int start;
      // chip_last is high in the last of 5 cycles (shortened chip)
      repeat (4) @(posedge clk);
      @(negedge clk);
      offer = ((chip % 37) < 33);      // idle gaps now and then
      d = $urandom_range(0, 1);
      chip_valid = offer; chip_dir = d; chip_last = 1;
      #1;
      check(chip_ready == offer, "chip_ready");
      start = was_active ? acc : 0;
      @(posedge clk);
      #1 chip_last = 0; chip_valid = 0;
      if (offer) begin
        check(active == 1, "active");
        check((wave_sel < 4) == d, $sformatf("frequency of wave %0d for dir %0d", wave_sel, d));
        check(quart[wave_sel] == start, $sformatf("wave %0d phase vs accumulated %0d", wave_sel, start));
        check(phase_q == 2'(start), "phase_q");
        if (start == 1 && d == 1) begin
          check(wave_sel == 3'd1, "pi/2 -> pi picks wave #1");
          seen_ex++;
        end
        acc = d ? (start + 1) % 4 : (start + 3) % 4;
        was_active = 1;
      end else begin
        check(active == 0, "idle");
        was_active = 0;
        acc = 0;
      end
    end
    check(seen_ex > 0, "example transition seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
