// tag_bit_source: serialises tag data bytes for codeword translation.
//
// Reads num_bytes bytes from the tag data buffer (combinational read port)
// and offers their bits, least significant bit first, on a valid/ready
// stream to the codeword-translation controller. start is taken only while
// idle; busy falls when the last bit is accepted. The bit order is this
// design's choice.
module tag_bit_source (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       start,
  input  logic [6:0] num_bytes,
  output logic [6:0] rd_addr,
  input  logic [7:0] rd_data,
  output logic       bit_valid,
  output logic       bit_data,
  input  logic       bit_ready,
  output logic       busy
);

  logic [6:0] last;
  logic [2:0] bidx;

  assign bit_valid = busy;
  assign bit_data  = rd_data[bidx];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy    <= 1'b0;
      rd_addr <= '0;
      bidx    <= '0;
      last    <= '0;
    end else if (!busy) begin
      if (start && num_bytes != '0) begin
        busy    <= 1'b1;
        rd_addr <= '0;
        bidx    <= '0;
        last    <= num_bytes - 7'd1;
      end
    end else if (bit_ready) begin
      bidx <= bidx + 3'd1;
      if (bidx == 3'd7) begin
        rd_addr <= rd_addr + 7'd1;
        if (rd_addr == last) busy <= 1'b0;
      end
    end
  end

endmodule
