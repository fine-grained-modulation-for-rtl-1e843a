// Spectrum workload: occupied bandwidth of FPS against IPS.
//
// fps_tag_top (default parameters) sends a 20-byte packet in FPS mode while
// the switch line is recorded at the 100 MHz clock. For comparison the same
// chip directions are also rendered the IPS way, inside this testbench only:
// a plain 10 MHz square wave whose phase jumps by +/-pi/2 at each chip
// boundary (the four-phase scheme FPS is compared against; not part of the
// RTL). For both records a DFT over 5-15 MHz in 25 kHz steps gives the power
// spectrum around f_shift, and the 90 % occupied bandwidth is the distance
// between the 5 % and 95 % points of the cumulative power.
//
// Reported reference values: 1.8 MHz for FPS and 3.2 MHz for IPS, FPS about
// 2x narrower. Checked here: FPS below 2.2 MHz, IPS above 2.5 MHz, and FPS at
// least 1.5x narrower than IPS.
module tb_fps_bandwidth;
  logic clk = 0, rst_n = 0, mode = 0, start = 0, chip_sync = 0;
  logic [6:0] len = 0;
  logic buf_we = 0;
  logic [6:0] buf_addr = 0;
  logic [7:0] buf_wdata = 0;
  logic rf_sw, busy;
  int checks = 0, failures = 0;

  localparam int SPC  = 50;
  localparam int NTAB = 4000;          // 100 MHz / 25 kHz
  real costab [NTAB], sintab [NTAB];

  bit fps_s [$];
  bit dirs  [$];

  fps_tag_top dut (.clk, .rst_n, .mode, .start, .len, .chip_sync, .buf_we,
                   .buf_addr, .buf_wdata, .rf_sw, .busy);

  always #5 clk = ~clk;

  // chip directions as the modulator takes them
  always @(posedge clk) if (rst_n && dut.chip_ready) dirs.push_back(dut.chip_dir);

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  // 90 % occupied bandwidth in MHz of a +/-1 record
  function automatic real obw(bit s[$]);
    real p [401];
    real tot = 0, acc = 0, f5 = 0, f95 = 0;
    bit got5 = 0, got95 = 0;
    for (int m = 0; m <= 400; m++) begin
      real I = 0, Q = 0;
      int bin = 200 + m;                // 5 MHz + m * 25 kHz
      int idx = 0;
      foreach (s[k]) begin
        real v = s[k] ? 1.0 : -1.0;
        I += v * costab[idx];
        Q += v * sintab[idx];
        idx += bin;
        if (idx >= NTAB) idx -= NTAB;
      end
      p[m] = I * I + Q * Q;
      tot += p[m];
    end
    for (int m = 0; m <= 400; m++) begin
      acc += p[m];
      if (!got5 && acc >= 0.05 * tot) begin got5 = 1; f5 = 5.0 + 0.025 * m; end
      if (!got95 && acc >= 0.95 * tot) begin got95 = 1; f95 = 5.0 + 0.025 * m; end
    end
    return f95 - f5;
  endfunction

  initial begin
    bit ips_s [$];
    int k0, nchips, theta;
    real bw_fps, bw_ips;
    for (int i = 0; i < NTAB; i++) begin
      costab[i] = $cos(2 * 3.14159265358979 * i / NTAB);
      sintab[i] = $sin(2 * 3.14159265358979 * i / NTAB);
    end
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    for (int i = 0; i < 20; i++) begin
      @(negedge clk) buf_we = 1; buf_addr = 7'(i); buf_wdata = 8'($urandom);
    end
    @(negedge clk) buf_we = 0;
    @(negedge clk) mode = 0; len = 7'd20; start = 1;
    @(negedge clk) start = 0;
    k0 = -1;
    while (busy || fps_s.size() < 100) begin
      @(posedge clk); #1;
      if (k0 < 0 && rf_sw) k0 = 0;
      if (k0 >= 0) fps_s.push_back(rf_sw);
    end
    nchips = 64 * 28;
    while (fps_s.size() > SPC * nchips) void'(fps_s.pop_back());
    check(fps_s.size() == SPC * nchips, "packet recorded");
    check(dirs.size() == nchips, $sformatf("chip count %0d", dirs.size()));

    // IPS rendering of the same chips: phase jumps at each boundary
    theta = 0;
    for (int c = 0; c < nchips; c++) begin
      theta = (theta + (dirs[c] ? 1 : 3)) % 4;
      for (int k = 0; k < SPC; k++)
        ips_s.push_back(((20 * k + 50 * theta) % 200) < 100);
    end

    bw_fps = obw(fps_s);
    bw_ips = obw(ips_s);
    $display("90%% occupied bandwidth: FPS %0.3f MHz, IPS %0.3f MHz, ratio %0.2f",
             bw_fps, bw_ips, bw_ips / bw_fps);
    check(bw_fps < 2.2, "FPS bandwidth near the reported 1.8 MHz");
    check(bw_ips > 2.5, "IPS bandwidth near the reported 3.2 MHz");
    check(bw_ips / bw_fps > 1.5, "FPS clearly narrower than IPS");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (500000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
