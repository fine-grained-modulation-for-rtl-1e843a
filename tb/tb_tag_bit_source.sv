// Testbench for tag_bit_source with a behavioural buffer: the bit stream must
// be the buffered bytes, least significant bit first, exactly 8 x num_bytes
// bits, with random stalls on the taking side; busy must drop afterwards.
module tb_tag_bit_source;
  logic clk = 0, rst_n = 0, start = 0, bit_valid, bit_data, bit_ready = 0, busy;
  logic [6:0] num_bytes = 0, rd_addr;
  logic [7:0] rd_data;
  logic [7:0] mem [128];
  bit got_q [$];
  int checks = 0, failures = 0;

  tag_bit_source dut (.clk, .rst_n, .start, .num_bytes, .rd_addr, .rd_data,
                      .bit_valid, .bit_data, .bit_ready, .busy);
  assign rd_data = mem[rd_addr];
  always #5 clk = ~clk;

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  always @(posedge clk) if (rst_n && bit_valid && bit_ready) got_q.push_back(bit_data);
  always @(negedge clk) bit_ready <= ($urandom_range(0, 2) != 0);

  initial begin
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1;
    for (int k = 1; k < 20; k += 6) begin
      got_q = {};
      for (int i = 0; i < k; i++) mem[i] = 8'($urandom);
      @(negedge clk) num_bytes = 7'(k); start = 1;
      @(negedge clk) start = 0;
      wait (!busy);
      repeat (2) @(posedge clk);
      check(got_q.size() == 8 * k, "bit count");
      for (int i = 0; i < 8 * k && i < got_q.size(); i++)
        check(got_q[i] == mem[i / 8][i % 8], $sformatf("bit %0d", i));
    end
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
