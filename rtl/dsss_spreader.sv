// dsss_spreader: 802.15.4 direct-sequence spreading into phase directions.
//
// Every 4-bit symbol becomes 32 chips c0..c31 of the IEEE 802.15.4 2.4 GHz
// table (fps_pkg::chip_seq). A receiver does not see the chips themselves: it
// sees the sign of the phase step from one chip to the next, +pi/2 read as 1
// and -pi/2 as 0. For O-QPSK with half-sine shaping that step is
//   d_n = c_n xor c_(n-1) xor (n odd)
// and this is what the spreader outputs, because it is exactly what the tag's
// FPS modulator must produce. The first ten d_n of symbols 0000, 0001, 1110
// and 1111 (1100000011, 1001110000, 0001000010, 1111000100) are the chip
// prefixes printed in the published transmitter figure. For chip 0, c_(n-1)
// is the last chip of the previous symbol; at the start of a packet it is
// taken as 0 (a choice of this design).
//
// Interfaces are valid/ready streams. A symbol is accepted when none is held
// or when the last chip of the held one is consumed, so back-to-back symbols
// leave no gap. chip_dir is combinational from registered state.
module dsss_spreader (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       sym_valid,
  input  logic [3:0] sym,
  output logic       sym_ready,
  output logic       chip_valid,
  output logic       chip_dir,
  input  logic       chip_ready
);

  logic        have;
  logic [31:0] seq;     // c0 in bit 31
  logic [4:0]  n;       // index of the chip on offer
  logic        prev;    // chip c_(n-1)
  logic        cur;

  assign cur        = seq[5'd31 - n];
  assign chip_valid = have;
  assign chip_dir   = cur ^ prev ^ n[0];
  assign sym_ready  = !have || (chip_ready && n == 5'd31);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      have <= 1'b0;
      seq  <= '0;
      n    <= '0;
      prev <= 1'b0;
    end else begin
      if (have && chip_ready) begin
        prev <= cur;
        n    <= n + 1'b1;
        if (n == 5'd31 && !sym_valid) begin
          have <= 1'b0;
          prev <= 1'b0;
        end
      end
      if (sym_valid && sym_ready) begin
        have <= 1'b1;
        seq  <= fps_pkg::chip_seq(sym);
        n    <= '0;
      end
    end
  end

  // Stream rule: a chip on offer stays on offer, unchanged, until taken.
  a_chip_stable: assert property (@(posedge clk) disable iff (!rst_n)
    chip_valid && !chip_ready |=> chip_valid && $stable(chip_dir));

endmodule
