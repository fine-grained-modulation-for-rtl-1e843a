// Testbench for tag_data_buffer: the memory must read back as zero after
// reset and return, on its combinational read port, the last byte written to
// each address, against a model array.
module tb_tag_data_buffer;
  logic clk = 0, rst_n = 0, we = 0;
  logic [6:0] wr_addr = 0, rd_addr = 0;
  logic [7:0] wr_data = 0, rd_data;
  logic [7:0] model [128];
  int checks = 0, failures = 0;

  tag_data_buffer dut (.clk, .rst_n, .we, .wr_addr, .wr_data, .rd_addr, .rd_data);
  always #5 clk = ~clk;

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1;
    for (int i = 0; i < 128; i++) begin
      model[i] = 0;
      rd_addr = 7'(i); #1;
      check(rd_data == 0, "cleared at reset");
    end
    for (int k = 0; k < 600; k++) begin
      @(negedge clk);
      we = $urandom_range(0, 1);
      wr_addr = 7'($urandom); wr_data = 8'($urandom);
      rd_addr = 7'($urandom);
      #1 check(rd_data == model[rd_addr], $sformatf("read %0d", rd_addr));
      @(posedge clk);
      if (we) model[wr_addr] = wr_data;
    end
    @(negedge clk) we = 0;
    for (int i = 0; i < 128; i++) begin
      rd_addr = 7'(i); #1;
      check(rd_data == model[i], "final contents");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
