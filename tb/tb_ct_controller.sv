// Testbench for ct_controller with its default of 32 chips per tag bit. Each
// tag bit must hold for exactly 32 chips; a 1 must select the f_shift + f_FP
// waves (#0 or #2) and a 0 the f_shift waves (#4 or #6), and the selected
// wave's initial phase (0 or pi) must equal the carrier offset built up so far,
// which gains pi for every chip of a 1.
module tb_ct_controller;
  logic clk = 0, rst_n = 0, chip_last = 0, bit_valid = 0, bit_data = 0;
  logic bit_ready, active, phase_h;
  logic [2:0] wave_sel;
  int checks = 0, failures = 0;
  int half_of[8] = '{0, 0, 1, 0, 0, 0, 1, 0};
  int acc = 0;
  bit was_active = 0;
  bit bits [$];
  int taken = 0, chips_in_bit = 0;
  bit cur;

  ct_controller dut (.clk, .rst_n, .chip_last, .bit_valid, .bit_data,
                     .bit_ready, .active, .wave_sel, .phase_h);

  always #5 clk = ~clk;

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  initial begin
    for (int i = 0; i < 12; i++) bits.push_back($urandom_range(0, 1));
    bits[0] = 1; bits[1] = 1; bits[2] = 0;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1;
    for (int chip = 0; chip < 12 * 32 + 5; chip++) begin
      int start;
      repeat (3) @(posedge clk);
      @(negedge clk);
      bit_valid = (taken < bits.size());
      bit_data  = bit_valid ? bits[taken] : 0;
      chip_last = 1;
      #1;
      if (chips_in_bit == 0) begin
        check(bit_ready == bit_valid, "bit taken at bit boundary");
        if (bit_valid) begin cur = bits[taken]; taken++; chips_in_bit = 32; end
      end else begin
        check(bit_ready == 0, "no bit taken inside a bit");
      end
      start = was_active ? acc : 0;
      @(posedge clk);
      #1 chip_last = 0; bit_valid = 0;
      if (chips_in_bit > 0) begin
        check(active == 1, "active");
        check((wave_sel < 4) == cur, $sformatf("wave %0d for tag bit %0d", wave_sel, cur));
        check(wave_sel[0] == 0, "only phase 0 / pi waves");
        check(half_of[wave_sel] == start, "initial phase equals carrier offset");
        check(phase_h == start[0], "phase_h");
        acc = (start + cur) % 2;
        was_active = 1;
        chips_in_bit--;
      end else begin
        check(active == 0, "idle after last bit");
        was_active = 0; acc = 0;
      end
    end
    check(taken == bits.size(), "all bits sent");
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
