// End-to-end testbench of fps_tag_top at its default parameters (100 MHz
// clock, 10 MHz shift, 0.5 us chips).
//
// The RF switch line is demodulated here the way a receiver sees it. For
// every 50-sample chip the +/-1 switch signal is correlated with a 10 MHz
// reference (f_shift); the phase of that correlation is the phase of the
// reflection at mid-chip relative to the shifted carrier. Tracking the phase
// at chip boundaries from chip to chip:
//   FPS mode: mid-chip = start + pi/4 for a +pi/2 chip (read as 1) and
//             start - pi/4 for a -pi/2 chip (read as 0), as in the receiver
//             rule that maps a positive phase step to 1;
//   CT mode : mid-chip = start + pi/2 for a tag-bit-1 chip (+pi per chip) and
//             start for a tag-bit-0 chip.
// FPS chips are then correlated against the 802.15.4 table (chips 1..31 of a
// symbol in phase-direction form) to recover symbols, bytes and the FCS, as a
// commodity receiver does; CT chips give back the tag bits.
//
// Also checked: the packet lasts exactly 64 chips per byte (250 kb/s), the
// switch is idle outside packets, every run of equal switch samples has the
// length of a half period of 9.5-11 MHz (no phase jumps), and chip_sync moves
// the chip grid. Mechanisms counted and required at least once: FPS packet,
// codeword-translation packet, mode switch both ways, chip re-alignment,
// +pi/2 chips, -pi/2 chips, tag bits 1 and 0, largest (125-byte) payload.
module tb_fps_tag_top;
  import fps_pkg::*;

  logic clk = 0, rst_n = 0, mode = 0, start = 0, chip_sync = 0;
  logic [6:0] len = 0;
  logic buf_we = 0;
  logic [6:0] buf_addr = 0;
  logic [7:0] buf_wdata = 0;
  logic rf_sw, busy;

  int checks = 0, failures = 0;
  longint cyc = 0;
  longint sync_cyc = 0;
  int grid_ofs[$];                    // (first chip sample - sync) mod 50, per packet
  int n_fps = 0, n_ct = 0, n_sw_fc = 0, n_sw_cf = 0, n_sync = 0;
  int n_plus = 0, n_minus = 0, n_one = 0, n_zero = 0, n_max = 0;
  logic last_mode = 0;
  bit   any_pkt = 0;

  localparam int SPC = 50;            // samples per chip

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
  always @(posedge clk) cyc <= cyc + 1;

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; if (failures < 15) $display("FAIL: %s", what); end
  endtask

  function automatic real wrap(real a);
    while (a > 3.14159265358979) a -= 2 * 3.14159265358979;
    while (a <= -3.14159265358979) a += 2 * 3.14159265358979;
    return a;
  endfunction

  // CRC-16 (x^16 + x^12 + x^5 + 1) LSB first, unreflected register, reversed result.
  function automatic logic [15:0] ref_crc(logic [7:0] bytes[$]);
    logic [15:0] r = 0, out;
    foreach (bytes[i])
      for (int b = 0; b < 8; b++) begin
        logic fb = r[15] ^ bytes[i][b];
        r = {r[14:0], 1'b0};
        if (fb) r = r ^ 16'h1021;
      end
    for (int i = 0; i < 16; i++) out[i] = r[15 - i];
    return out;
  endfunction

  // Phase-direction form d_1..d_31 of a table row.
  function automatic bit [30:0] dir_row(int s);
    bit [30:0] d;
    for (int n = 1; n < 32; n++)
      d[n - 1] = (table_rows[s][n] == "1") ^ (table_rows[s][n - 1] == "1") ^ n[0];
    return d;
  endfunction

  task automatic write_buf(logic [7:0] bytes[$]);
    foreach (bytes[i]) begin
      @(negedge clk);
      buf_we = 1; buf_addr = 7'(i); buf_wdata = bytes[i];
    end
    @(negedge clk) buf_we = 0;
  endtask

  task automatic resync(int delay);
    repeat (delay) @(negedge clk);
    chip_sync = 1;
    sync_cyc = cyc;
    @(negedge clk) chip_sync = 0;
    n_sync++;
  endtask

  // Send one packet in the given mode and demodulate the switch line.
  task automatic run_packet(logic m, logic [7:0] bytes[$]);
    bit s [$];
    longint first_cyc;
    int k0, nchips, expect_chips;
    real theta, phi, dev;
    bit dirs [$];
    int runlen, bad_runs;

    write_buf(bytes);
    if (any_pkt && m != last_mode) begin
      if (m) n_sw_fc++; else n_sw_cf++;
    end
    any_pkt = 1; last_mode = m;
    @(negedge clk);
    mode = m; len = 7'(bytes.size()); start = 1;
    @(negedge clk) start = 0;
    first_cyc = cyc;
    // record until idle, plus a margin
    while (busy || s.size() < 200) begin
      @(posedge clk); #1;
      s.push_back(rf_sw);
      if (!busy && s.size() > 400) break;
    end
    repeat (100) begin @(posedge clk); #1; s.push_back(rf_sw); end

    k0 = -1;
    foreach (s[i]) if (k0 < 0 && s[i]) k0 = i;
    check(k0 >= 0, "switch started");
    if (k0 < 0) return;
    check(k0 < 2 * SPC, $sformatf("start latency %0d cycles", k0));
    grid_ofs.push_back(int'((first_cyc + k0 - sync_cyc) % SPC));

    expect_chips = m ? 32 * 8 * bytes.size() : 64 * (bytes.size() + 8);
    // active length: last 1 sample lies in the final chip, then idle
    nchips = 0;
    for (int i = s.size() - 1; i >= 0; i--) if (s[i]) begin nchips = (i - k0) / SPC + 1; break; end
    check(nchips == expect_chips, $sformatf("packet length %0d chips, expected %0d", nchips, expect_chips));
    for (int i = k0 + SPC * expect_chips; i < s.size(); i++) check(s[i] == 0, "idle after packet");

    // no phase jumps: every run of equal samples is 4..6 long
    bad_runs = 0; runlen = 1;
    for (int i = k0 + 1; i < k0 + SPC * expect_chips; i++) begin
      if (s[i] == s[i - 1]) runlen++;
      else begin
        if (i - runlen > k0 && (runlen < 4 || runlen > 6)) bad_runs++;
        runlen = 1;
      end
    end
    check(bad_runs == 0, $sformatf("%0d irregular half periods", bad_runs));

    // per-chip mid phase against 10 MHz; fundamental of a wave high on [0, pi) is at -pi/2
    theta = 0.0;
    for (int c = 0; c < expect_chips; c++) begin
      real I = 0, Q = 0;
      for (int k = 0; k < SPC; k++) begin
        real v = s[k0 + SPC * c + k] ? 1.0 : -1.0;
        real w = 2 * 3.14159265358979 * 0.1 * (SPC * c + k);
        I += v * $cos(w);
        Q -= v * $sin(w);
      end
      phi = wrap($atan2(Q, I) + 3.14159265358979 / 2);
      dev = wrap(phi - theta);
      if (!m) begin
        bit d = dev > 0;
        check(dev > 0.39 && dev < 1.18 || dev < -0.39 && dev > -1.18,
              $sformatf("chip %0d mid-phase step %f", c, dev));
        dirs.push_back(d);
        if (d) n_plus++; else n_minus++;
        theta = wrap(theta + (d ? 1.5707963 : -1.5707963));
      end else begin
        bit d = dev > 0.785;
        check(dev > -0.39 && dev < 0.39 || dev > 1.18 && dev < 1.96,
              $sformatf("ct chip %0d mid-phase step %f", c, dev));
        dirs.push_back(d);
        theta = wrap(theta + (d ? 3.14159265358979 : 0.0));
      end
    end

    if (!m) begin
      // FPS: receiver correlation against the table, then frame checks
      logic [7:0] got[$];
      logic [7:0] frame[$];
      logic [15:0] fcs;
      logic [3:0] lo;
      frame = '{8'h00, 8'h00, 8'h00, 8'h00, 8'hA7, 8'(bytes.size() + 2)};
      foreach (bytes[i]) frame.push_back(bytes[i]);
      fcs = ref_crc(bytes);
      frame.push_back(fcs[7:0]); frame.push_back(fcs[15:8]);
      for (int y = 0; y < expect_chips / 32; y++) begin
        bit [30:0] rx;
        int best = 0, bestd = 99;
        for (int n = 1; n < 32; n++) rx[n - 1] = dirs[32 * y + n];
        for (int sy = 0; sy < 16; sy++) begin
          int dd = $countones(rx ^ dir_row(sy));
          if (dd < bestd) begin bestd = dd; best = sy; end
        end
        check(bestd == 0, $sformatf("symbol %0d Hamming distance %0d", y, bestd));
        if (y % 2 == 0) lo = 4'(best); else got.push_back({4'(best), lo});
      end
      check(got.size() == frame.size(), "frame length");
      foreach (frame[i]) if (i < got.size()) check(got[i] == frame[i], $sformatf("frame byte %0d", i));
      n_fps++;
      if (bytes.size() == 125) n_max++;
    end else begin
      for (int b = 0; b < 8 * bytes.size(); b++) begin
        int ones = 0;
        for (int c = 0; c < 32; c++) ones += dirs[32 * b + c];
        check(ones == 0 || ones == 32, $sformatf("tag bit %0d chips agree (%0d)", b, ones));
        check((ones == 32) == bytes[b / 8][b % 8], $sformatf("tag bit %0d", b));
        if (ones == 32) n_one++; else n_zero++;
      end
      n_ct++;
    end
  endtask

  initial begin
    logic [7:0] p[$];
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    resync(7);
    p = {}; for (int i = 0; i < 10; i++) p.push_back(8'($urandom));
    run_packet(1'b0, p);
    p = '{8'hA5, 8'h0F, 8'h3C};
    run_packet(1'b1, p);
    resync(23);
    p = {}; for (int i = 0; i < 20; i++) p.push_back(8'($urandom));
    run_packet(1'b0, p);
    p = {}; for (int i = 0; i < 125; i++) p.push_back(8'($urandom));
    run_packet(1'b0, p);

    // chip grid follows chip_sync: same offset for packets after one sync
    check(grid_ofs.size() == 4, "grid offsets recorded");
    check(grid_ofs[0] == grid_ofs[1] && grid_ofs[2] == grid_ofs[3] && grid_ofs[0] == grid_ofs[2],
          $sformatf("chip grid relative to sync: %p", grid_ofs));

    $display("mechanisms: fps=%0d ct=%0d fps->ct=%0d ct->fps=%0d sync=%0d +pi/2=%0d -pi/2=%0d bit1=%0d bit0=%0d max=%0d",
             n_fps, n_ct, n_sw_fc, n_sw_cf, n_sync, n_plus, n_minus, n_one, n_zero, n_max);
    check(n_fps > 0, "FPS packet");
    check(n_ct > 0, "codeword translation");
    check(n_sw_fc > 0 && n_sw_cf > 0, "mode switches");
    check(n_sync > 1, "chip re-alignment");
    check(n_plus > 0 && n_minus > 0, "both FPS directions");
    check(n_one > 0 && n_zero > 0, "both tag bit values");
    check(n_max > 0, "largest payload");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2_000_000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
