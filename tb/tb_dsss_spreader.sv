// Testbench for dsss_spreader. The reference is the IEEE 802.15.4 2.4 GHz
// chip table written out row by row (c0 first), independent of how the RTL
// builds it. Expected output per chip: d_n = c_n xor c_(n-1) xor (n odd),
// with c_(-1) = 0 at the start of a burst. The first ten outputs of symbols
// 0000, 0001, 1110 and 1111 must also equal the prefixes printed in the
// transmitter figure. Symbols arrive back to back and with gaps; chips are
// taken with random stalls.
module tb_dsss_spreader;
  logic clk = 0, rst_n = 0;
  logic sym_valid = 0, sym_ready, chip_valid, chip_dir, chip_ready = 0;
  logic [3:0] sym = 0;
  int checks = 0, failures = 0;

  string table_rows [16] = '{
    "11011001110000110101001000101110", "11101101100111000011010100100010",
    "00101110110110011100001101010010", "00100010111011011001110000110101",
    "01010010001011101101100111000011", "00110101001000101110110110011100",
    "11000011010100100010111011011001", "10011100001101010010001011101101",
    "10001100100101100000011101111011", "10111000110010010110000001110111",
    "01111011100011001001011000000111", "01110111101110001100100101100000",
    "00000111011110111000110010010110", "01100000011101111011100011001001",
    "10010110000001110111101110001100", "11001001011000000111011110111000"};

  bit exp_q [$];        // expected phase directions, in order
  bit got_q [$];
  int prefix_sym [4] = '{0, 1, 14, 15};
  string prefix_txt [4] = '{"1100000011", "1001110000", "0001000010", "1111000100"};

  dsss_spreader dut (.clk, .rst_n, .sym_valid, .sym, .sym_ready,
                     .chip_valid, .chip_dir, .chip_ready);

  always #5 clk = ~clk;

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  // expected directions of a burst of symbols
  function automatic void expect_burst(int syms[$]);
    bit prev = 0;
    foreach (syms[i])
      for (int n = 0; n < 32; n++) begin
        bit c = (table_rows[syms[i]][n] == "1");
        exp_q.push_back(c ^ prev ^ n[0]);
        prev = c;
      end
  endfunction

  // collect chips
  always @(posedge clk) if (rst_n && chip_valid && chip_ready) got_q.push_back(chip_dir);

  // random stalls on the chip side
  always @(negedge clk) chip_ready <= ($urandom_range(0, 3) != 0);

  task automatic send_burst(int syms[$]);
    foreach (syms[i]) begin
      @(negedge clk);
      sym_valid = 1; sym = 4'(syms[i]);
      do @(posedge clk); while (!sym_ready);
      #1 sym_valid = 0;
    end
  endtask

  initial begin
    int burst[$];
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1;
    // the four rows printed in the figure, each as its own burst
    foreach (prefix_sym[p]) begin
      burst = '{prefix_sym[p]};
      expect_burst(burst);
      send_burst(burst);
      wait (!chip_valid);
      repeat (3) @(posedge clk);
    end
    // random back-to-back bursts
    for (int b = 0; b < 6; b++) begin
      burst = {};
      for (int i = 0; i < 5 + b; i++) burst.push_back($urandom_range(0, 15));
      expect_burst(burst);
      send_burst(burst);
      wait (!chip_valid);
      repeat (3) @(posedge clk);
    end
    check(got_q.size() == exp_q.size(), $sformatf("chip count %0d vs %0d", got_q.size(), exp_q.size()));
    foreach (exp_q[i])
      if (i < got_q.size()) check(got_q[i] == exp_q[i], $sformatf("chip %0d", i));
    // figure prefixes: positions d_1..d_10 of each of the first four bursts
    foreach (prefix_txt[p])
      for (int n = 0; n < 10; n++)
        check(got_q[32 * p + 1 + n] == (prefix_txt[p][n] == "1"),
              $sformatf("figure prefix of symbol %0d, chip %0d", prefix_sym[p], n + 1));
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
