// packet_framer: turns tag data into an IEEE 802.15.4 PHY packet.
//
// Byte sequence of one packet (the 802.15.4 PPDU):
//   4 x 0x00 preamble | SFD 0xA7 | PHR = payload_len + 2 |
//   payload_len bytes from the tag data buffer | FCS low byte | FCS high byte
// The FCS is the 16-bit ITU-T CRC of the payload (reflected polynomial
// 0x8408, initial value 0), computed on the fly. Each byte is sent as two
// 4-bit symbols, low nibble first, on a valid/ready stream; symbol k of the
// packet lasts one 32-chip symbol time (16 us) downstream.
//
// The frame format is the standard's; the published design only states that
// the tag sends 802.15.4 packets with a header in front of the data. The
// buffer read port is combinational: rd_addr points at the payload byte on
// offer. start is taken only while idle; busy falls after the last symbol is
// accepted.
module packet_framer #(
  parameter int unsigned MAX_PAYLOAD = 125
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       start,
  input  logic [6:0] payload_len,
  output logic [6:0] rd_addr,
  input  logic [7:0] rd_data,
  output logic       sym_valid,
  output logic [3:0] sym,
  input  logic       sym_ready,
  output logic       busy
);

  localparam int unsigned HDR_BYTES = fps_pkg::PREAMBLE_LEN + 2;   // preamble, SFD, PHR

  logic [7:0]  pos;       // byte index within the packet
  logic        nib;       // 0: low nibble on offer, 1: high nibble
  logic [6:0]  len;
  logic [15:0] crc;
  logic [7:0]  cur_byte;
  logic [7:0]  last_pos;

  assign last_pos = 8'(HDR_BYTES) + 8'(len) + 8'd1;
  assign rd_addr  = 7'(pos - 8'(HDR_BYTES));

  always_comb begin
    if (pos < 8'(fps_pkg::PREAMBLE_LEN))  cur_byte = 8'h00;
    else if (pos == 8'(fps_pkg::PREAMBLE_LEN)) cur_byte = fps_pkg::SFD_BYTE;
    else if (pos == 8'(HDR_BYTES - 1))    cur_byte = {1'b0, 7'(len + 7'd2)};
    else if (pos < 8'(HDR_BYTES) + 8'(len)) cur_byte = rd_data;
    else if (pos == last_pos - 8'd1)      cur_byte = crc[7:0];
    else                                  cur_byte = crc[15:8];
  end

  assign sym_valid = busy;
  assign sym       = nib ? cur_byte[7:4] : cur_byte[3:0];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0;
      pos  <= '0;
      nib  <= 1'b0;
      len  <= '0;
      crc  <= '0;
    end else if (!busy) begin
      if (start) begin
        busy <= 1'b1;
        pos  <= '0;
        nib  <= 1'b0;
        len  <= (payload_len > 7'(MAX_PAYLOAD)) ? 7'(MAX_PAYLOAD) : payload_len;
        crc  <= '0;
      end
    end else if (sym_ready) begin
      nib <= !nib;
      if (nib) begin
        if (pos >= 8'(HDR_BYTES) && pos < 8'(HDR_BYTES) + 8'(len))
          crc <= fps_pkg::crc16_byte(crc, cur_byte);
        pos <= pos + 8'd1;
        if (pos == last_pos) busy <= 1'b0;
      end
    end
  end

endmodule
