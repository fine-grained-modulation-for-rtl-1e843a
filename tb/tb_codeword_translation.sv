// Codeword-translation workload with two receivers.
//
// A productive Zigbee carrier is modelled here as a random stream of 802.15.4
// symbols, i.e. a +/-pi/2 phase step per 0.5 us chip in the phase-direction
// form of the chip table. fps_tag_top, in codeword-translation mode with its
// chip grid aligned to the carrier by chip_sync, reflects it; the tag's own
// phase contribution per chip is measured from the switch line by
// correlation with a 10 MHz reference (mid-chip phase = start + step/2).
//   receiver 1 hears the carrier: chip = sign of the carrier step;
//   receiver 2 hears the reflection: chip = sign of (carrier step + tag step).
// Both correlate chips 1..31 of each symbol with the table and pick the
// nearest symbol. The tag bit of a symbol is 1 when the two symbols differ,
// and then receiver 2's symbol must be receiver 1's xor 8 (all phase steps
// reversed). The recovered bits must equal the bytes given to the tag.
module tb_codeword_translation;
  logic clk = 0, rst_n = 0, mode = 0, start = 0, chip_sync = 0;
  logic [6:0] len = 0;
  logic buf_we = 0;
  logic [6:0] buf_addr = 0;
  logic [7:0] buf_wdata = 0;
  logic rf_sw, busy;
  int checks = 0, failures = 0;

  localparam int SPC = 50;
  localparam int NBYTES = 4;
  localparam int NSYM = 8 * NBYTES;
  localparam real PI = 3.14159265358979;

  string table_rows [16] = '{
    "11011001110000110101001000101110", "11101101100111000011010100100010",
    "00101110110110011100001101010010", "00100010111011011001110000110101",
    "01010010001011101101100111000011", "00110101001000101110110110011100",
    "11000011010100100010111011011001", "10011100001101010010001011101101",
    "10001100100101100000011101111011", "10111000110010010110000001110111",
    "01111011100011001001011000000111", "01110111101110001100100101100000",
    "00000111011110111000110010010110", "01100000011101111011100011001001",
    "10010110000001110111101110001100", "11001001011000000111011110111000"};

  fps_tag_top dut (.clk, .rst_n, .mode, .start, .len, .chip_sync, .buf_we,
                   .buf_addr, .buf_wdata, .rf_sw, .busy);

  always #5 clk = ~clk;

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; if (failures < 15) $display("FAIL: %s", what); end
  endtask

  function automatic real wrap(real a);
    while (a > PI) a -= 2 * PI;
    while (a <= -PI) a += 2 * PI;
    return a;
  endfunction

  function automatic bit [30:0] dir_row(int s);
    bit [30:0] d;
    for (int n = 1; n < 32; n++)
      d[n - 1] = (table_rows[s][n] == "1") ^ (table_rows[s][n - 1] == "1") ^ n[0];
    return d;
  endfunction

  function automatic int nearest(bit [30:0] rx);
    int best = 0, bestd = 99;
    for (int sy = 0; sy < 16; sy++) begin
      int dd = $countones(rx ^ dir_row(sy));
      if (dd < bestd) begin bestd = dd; best = sy; end
    end
    return best;
  endfunction

  initial main();

  task automatic main();
    logic [7:0] data [NBYTES];
    int carrier_sym [NSYM];
    bit s [$];
    real tag_step [$];
    real theta;
    int k0, ones = 0, zeros = 0;

    foreach (data[i]) data[i] = 8'($urandom);
    data[0][0] = 1; data[0][1] = 0;
    foreach (carrier_sym[i]) carrier_sym[i] = $urandom_range(0, 15);

    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    foreach (data[i]) begin
      @(negedge clk) buf_we = 1; buf_addr = 7'(i); buf_wdata = data[i];
    end
    @(negedge clk) buf_we = 0;
    // carrier chip grid: align the tag to it
    @(negedge clk) chip_sync = 1;
    @(negedge clk) chip_sync = 0;
    mode = 1; len = 7'(NBYTES); start = 1;
    @(negedge clk) start = 0;
    k0 = -1;
    while (busy || s.size() < 100) begin
      @(posedge clk); #1;
      if (k0 < 0 && rf_sw) k0 = 0;
      if (k0 >= 0) s.push_back(rf_sw);
    end
    check(s.size() >= SPC * 32 * NSYM, "transfer recorded");

    // tag phase step per chip, measured
    theta = 0;
    for (int c = 0; c < 32 * NSYM; c++) begin
      real I = 0, Q = 0, phi, step;
      for (int k = 0; k < SPC; k++) begin
        real v = s[SPC * c + k] ? 1.0 : -1.0;
        real w = 2 * PI * 0.1 * (SPC * c + k);
        I += v * $cos(w);
        Q -= v * $sin(w);
      end
      phi  = wrap($atan2(Q, I) + PI / 2);
      step = 2 * wrap(phi - theta);
      tag_step.push_back(step);
      theta = wrap(theta + step);
    end

    // the two receivers
    for (int y = 0; y < NSYM; y++) begin
      bit [30:0] rx1, rx2;
      int s1, s2;
      bit tagbit;
      bit prev = 0;
      for (int n = 0; n < 32; n++) begin
        bit c = (table_rows[carrier_sym[y]][n] == "1");
        bit d = c ^ prev ^ n[0];
        real cstep = d ? PI / 2 : -PI / 2;
        if (n > 0) begin
          rx1[n - 1] = d;
          rx2[n - 1] = wrap(cstep + tag_step[32 * y + n]) > 0;
        end
        prev = c;
      end
      s1 = nearest(rx1);
      s2 = nearest(rx2);
      check(s1 == carrier_sym[y], $sformatf("receiver 1 symbol %0d", y));
      tagbit = (s1 != s2);
      if (tagbit) begin
        check(s2 == (s1 ^ 8), $sformatf("symbol %0d translated to %0d, expected %0d", y, s2, s1 ^ 8));
        ones++;
      end else zeros++;
      check(tagbit == data[y / 8][y % 8], $sformatf("tag bit %0d", y));
    end
    check(ones > 0 && zeros > 0, "both tag bit values");
    $display("codeword translation: %0d tag bits, %0d ones, %0d zeros", NSYM, ones, zeros);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  endtask

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
