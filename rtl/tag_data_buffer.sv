// tag_data_buffer: storage for the bytes the tag is to send.
//
// A DEPTH x 8 memory with one synchronous write port (for whatever supplies
// the tag data) and one combinational read port used by the packet framer or
// the codeword-translation bit source. On an FPGA it maps to distributed RAM.
// The default depth holds one largest 802.15.4 PSDU (127 bytes) rounded to
// 128. The memory is cleared at reset so nothing unknown is ever sent; both
// the memory and its size are this design's choices.
module tag_data_buffer #(
  parameter int unsigned DEPTH = 128,
  localparam int unsigned AW = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          we,
  input  logic [AW-1:0] wr_addr,
  input  logic [7:0]    wr_data,
  input  logic [AW-1:0] rd_addr,
  output logic [7:0]    rd_data
);

  logic [7:0] mem [DEPTH];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < DEPTH; i++) mem[i] <= '0;
    end else if (we) begin
      mem[wr_addr] <= wr_data;
    end
  end

  assign rd_data = mem[rd_addr];

endmodule
