// fps_pkg: constants and helper functions shared by the FPS backscatter tag.
//
// Frequencies and chip timing of the tag: the 10 MHz channel shift, the
// 500 kHz FPS offset (a quarter turn per 0.5 us chip) and the 1 MHz offset of
// codeword translation (half a turn per chip) are the published values. The
// 100 MHz logic clock and the 500 kHz phase resolution are this design's own
// choices: with them every frequency used is an integer number of phase units
// per clock, so the phase accumulators are exact and never drift.
//
// The IEEE 802.15.4 (2.4 GHz O-QPSK) chip table is built from its first row:
// symbols 1..7 are that row cyclically shifted right by 4 chips per step and
// symbols 8..15 are symbols 0..7 with every odd-numbered chip inverted. Chip
// c0 is bit 31 of a 32-bit word (the leftmost chip of the standard's table).
package fps_pkg;

  // Clock and timing (clock frequency is an assumption).
  localparam int unsigned F_CLK_HZ      = 100_000_000;
  localparam int unsigned CHIP_NS       = 500;          // 0.5 us per chip
  localparam int unsigned CLKS_PER_CHIP = F_CLK_HZ / 1_000_000 * CHIP_NS / 1000;

  // Frequencies of the square waves.
  localparam int unsigned F_SHIFT_HZ    = 10_000_000;   // channel 12 -> 14 shift
  localparam int unsigned F_FP_HZ       = 500_000;      // FPS: pi/2 per chip
  localparam int unsigned F_FP_CT_HZ    = 1_000_000;    // codeword translation: pi per chip
  localparam int unsigned F_RES_HZ      = 500_000;      // phase resolution (assumed)

  // 802.15.4 framing constants (from the standard).
  localparam int unsigned CHIPS_PER_SYM = 32;
  localparam logic [7:0]  SFD_BYTE      = 8'hA7;
  localparam int unsigned PREAMBLE_LEN  = 4;

  // Symbol 0 of the 802.15.4 2.4 GHz chip table, c0 in bit 31.
  localparam logic [31:0] CHIP_SEQ0     = 32'b11011001110000110101001000101110;

  // Chip sequence c0..c31 (c0 in bit 31) of a 4-bit symbol.
  function automatic logic [31:0] chip_seq(input logic [3:0] s);
    logic [31:0] base;
    base = (CHIP_SEQ0 >> (4 * s[2:0])) | (CHIP_SEQ0 << (32 - 4 * s[2:0]));
    if (s[2:0] == 3'd0) base = CHIP_SEQ0;
    // odd chips c1, c3, ... sit in bits 30, 28, ...
    if (s[3]) base = base ^ 32'h5555_5555;
    return base;
  endfunction

  // One bit of the 802.15.4 FCS: CRC-16 ITU-T, reflected (polynomial 0x8408),
  // data taken LSB first.
  function automatic logic [15:0] crc16_bit(input logic [15:0] crc, input logic b);
    logic fb;
    fb = crc[0] ^ b;
    return fb ? ((crc >> 1) ^ 16'h8408) : (crc >> 1);
  endfunction

  function automatic logic [15:0] crc16_byte(input logic [15:0] crc, input logic [7:0] d);
    logic [15:0] c;
    c = crc;
    for (int i = 0; i < 8; i++) c = crc16_bit(c, d[i]);
    return c;
  endfunction

  // Tag operating modes.
  typedef enum logic {
    MODE_FPS = 1'b0,   // FPS modulation of 802.15.4 packets on a single tone
    MODE_CT  = 1'b1    // FPS codeword translation of a productive carrier
  } tag_mode_e;

endpackage
