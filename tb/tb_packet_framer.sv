// Testbench for packet_framer with a behavioural buffer. The expected symbol
// stream is built here from the 802.15.4 frame layout: four 0x00 bytes, 0xA7,
// the length byte (payload + 2), the payload, and the FCS, low nibble of each
// byte first. The FCS reference is a bit-serial CRC-16 (x^16 + x^12 + x^5 + 1,
// initial 0, LSB first) whose check value on "123456789" must be 0x2189.
// Symbols are taken with random stalls; busy must drop after the last one.
module tb_packet_framer;
  logic clk = 0, rst_n = 0, start = 0, sym_valid, sym_ready = 0, busy;
  logic [6:0] payload_len = 0, rd_addr;
  logic [7:0] rd_data;
  logic [3:0] sym;
  logic [7:0] mem [128];
  int checks = 0, failures = 0;
  logic [3:0] got_q [$];

  packet_framer dut (.clk, .rst_n, .start, .payload_len, .rd_addr, .rd_data,
                     .sym_valid, .sym, .sym_ready, .busy);

  assign rd_data = mem[rd_addr];
  always #5 clk = ~clk;

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  // Bit-serial CRC with a shift register in the unreflected form: the
  // register is fed each data bit and the result is bit-reversed at the end.
  function automatic logic [15:0] ref_crc(logic [7:0] bytes[$]);
    logic [15:0] r = 0;
    logic [15:0] out;
    foreach (bytes[i])
      for (int b = 0; b < 8; b++) begin
        logic fb = r[15] ^ bytes[i][b];
        r = {r[14:0], 1'b0};
        if (fb) r = r ^ 16'h1021;
      end
    for (int i = 0; i < 16; i++) out[i] = r[15 - i];
    return out;
  endfunction

  always @(posedge clk) if (rst_n && sym_valid && sym_ready) got_q.push_back(sym);
  always @(negedge clk) sym_ready <= ($urandom_range(0, 2) != 0);

  task automatic send(logic [7:0] payload[$]);
    logic [7:0] frame[$];
    logic [15:0] fcs;
    int n0;
    foreach (payload[i]) mem[i] = payload[i];
    fcs = ref_crc(payload);
    frame = '{8'h00, 8'h00, 8'h00, 8'h00, 8'hA7, 8'(payload.size() + 2)};
    foreach (payload[i]) frame.push_back(payload[i]);
    frame.push_back(fcs[7:0]); frame.push_back(fcs[15:8]);
    n0 = got_q.size();
    @(negedge clk);
    payload_len = 7'(payload.size()); start = 1;
    @(negedge clk) start = 0;
    wait (!busy);
    repeat (3) @(posedge clk);
    check(got_q.size() - n0 == 2 * frame.size(), $sformatf("symbols %0d vs %0d", got_q.size() - n0, 2 * frame.size()));
    foreach (frame[i]) begin
      if (n0 + 2 * i + 1 < got_q.size()) begin
        check(got_q[n0 + 2 * i] == frame[i][3:0], $sformatf("byte %0d low nibble", i));
        check(got_q[n0 + 2 * i + 1] == frame[i][7:4], $sformatf("byte %0d high nibble", i));
      end
    end
  endtask

  initial begin
    logic [7:0] p[$];
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1;
    p = '{"1", "2", "3", "4", "5", "6", "7", "8", "9"};
    check(ref_crc(p) == 16'h2189, "reference CRC check value");
    send(p);
    for (int k = 0; k < 5; k++) begin
      p = {};
      for (int i = 0; i < 1 + 9 * k; i++) p.push_back(8'($urandom));
      send(p);
    end
    p = {};
    for (int i = 0; i < 125; i++) p.push_back(8'($urandom));
    send(p);                        // largest payload
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
