// fps_tag_top: digital part of an FPS (frequency-phase shift) Zigbee
// backscatter tag.
//
// The tag reflects an incoming 2.4 GHz carrier through an RF switch. Toggling
// the switch with a square wave of frequency f moves the reflection f away
// from the carrier; the square wave's phase becomes the reflection's phase.
// FPS writes Zigbee chips by changing that frequency for one chip at a time,
// so the phase moves smoothly by a quarter or half turn per chip rather than
// jumping. This module produces the switch control line rf_sw.
//
// Two modes, chosen by `mode` when `start` is taken:
//   MODE_FPS (0): single-tone carrier. The payload in the tag data buffer is
//     framed as an 802.15.4 packet (packet_framer), spread into per-chip phase
//     directions (dsss_spreader) and modulated with the eight f_shift +/- 500
//     kHz waves (fps_controller + square_wave_bank), so that an ordinary
//     Zigbee receiver on the shifted channel decodes the packet.
//   MODE_CT (1): productive Zigbee carrier. The buffered bytes are sent bit by
//     bit (tag_bit_source); each bit 1 adds +pi per chip over a 32-chip symbol
//     with the f_shift + 1 MHz wave, each bit 0 uses the plain f_shift wave
//     (ct_controller + a second square_wave_bank), translating the carrier's
//     codewords. Two receivers and an XOR outside the tag recover the bits.
//
// Timing: chip_timer divides the 100 MHz clock into 50-cycle (0.5 us) chips;
// a chip_sync pulse re-aligns the chips to an external reference. Modulation
// starts at the first chip boundary after start; rf_sw is registered, so it
// lags the chip boundary by one clock. Host writes to the buffer go through
// buf_we/buf_addr/buf_wdata and must not happen while busy.
//
// From the paper: the frequencies (10 MHz shift, 500 kHz and 1 MHz offsets),
// the 0.5 us chip, the wave sets and the phase-continuity rule. This design's
// own: the clock rate, framing and buffering, the bit-per-symbol grouping of
// codeword translation and the handshakes between blocks.
module fps_tag_top #(
  parameter int unsigned F_CLK_HZ   = fps_pkg::F_CLK_HZ,
  parameter int unsigned F_SHIFT_HZ = fps_pkg::F_SHIFT_HZ,
  parameter int unsigned CHIP_NS    = fps_pkg::CHIP_NS
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       mode,
  input  logic       start,
  input  logic [6:0] len,
  input  logic       chip_sync,
  input  logic       buf_we,
  input  logic [6:0] buf_addr,
  input  logic [7:0] buf_wdata,
  output logic       rf_sw,
  output logic       busy
);

  import fps_pkg::*;

  localparam int unsigned CPC = F_CLK_HZ / 1_000_000 * CHIP_NS / 1000;

  tag_mode_e  cur_mode;
  logic       chip_last;

  // Tag data buffer and its two readers.
  logic [6:0] rd_addr, rd_addr_fr, rd_addr_bs;
  logic [7:0] rd_data;

  // FPS packet path.
  logic       fr_start, fr_busy, sym_valid, sym_ready;
  logic [3:0] sym;
  logic       chip_valid, chip_dir, chip_ready;
  logic       fps_active;
  logic [2:0] fps_sel;
  logic [7:0] fps_waves;

  // Codeword translation path.
  logic       bs_start, bs_busy, bit_valid, bit_data, bit_ready;
  logic       ct_active;
  logic [2:0] ct_sel;
  logic [7:0] ct_waves;

  logic       idle;
  assign idle = !fr_busy && !chip_valid && !fps_active && !bs_busy && !ct_active;
  assign busy = !idle;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)             cur_mode <= MODE_FPS;
    else if (idle && start) cur_mode <= tag_mode_e'(mode);
  end

  assign fr_start = idle && start && (mode == MODE_FPS);
  assign bs_start = idle && start && (mode == MODE_CT);

  chip_timer #(.CLKS_PER_CHIP(CPC)) u_timer (
    .clk, .rst_n, .sync(chip_sync), .chip_last, .chip_cnt()
  );

  assign rd_addr = (cur_mode == MODE_CT) ? rd_addr_bs : rd_addr_fr;

  tag_data_buffer #(.DEPTH(128)) u_buf (
    .clk, .rst_n, .we(buf_we), .wr_addr(buf_addr), .wr_data(buf_wdata),
    .rd_addr, .rd_data
  );

  packet_framer u_framer (
    .clk, .rst_n, .start(fr_start), .payload_len(len),
    .rd_addr(rd_addr_fr), .rd_data, .sym_valid, .sym, .sym_ready, .busy(fr_busy)
  );

  dsss_spreader u_spread (
    .clk, .rst_n, .sym_valid, .sym, .sym_ready, .chip_valid, .chip_dir, .chip_ready
  );

  fps_controller u_fps (
    .clk, .rst_n, .chip_last, .chip_valid, .chip_dir, .chip_ready,
    .active(fps_active), .wave_sel(fps_sel), .phase_q()
  );

  square_wave_bank #(
    .F_CLK_HZ(F_CLK_HZ), .F_RES_HZ(F_RES_HZ),
    .F_HI_HZ(F_SHIFT_HZ + F_FP_HZ), .F_LO_HZ(F_SHIFT_HZ - F_FP_HZ)
  ) u_bank_fps (
    .clk, .rst_n, .chip_last, .waves(fps_waves)
  );

  tag_bit_source u_bits (
    .clk, .rst_n, .start(bs_start), .num_bytes(len),
    .rd_addr(rd_addr_bs), .rd_data, .bit_valid, .bit_data, .bit_ready, .busy(bs_busy)
  );

  ct_controller #(.CHIPS_PER_BIT(CHIPS_PER_SYM)) u_ct (
    .clk, .rst_n, .chip_last, .bit_valid, .bit_data, .bit_ready,
    .active(ct_active), .wave_sel(ct_sel), .phase_h()
  );

  square_wave_bank #(
    .F_CLK_HZ(F_CLK_HZ), .F_RES_HZ(F_RES_HZ),
    .F_HI_HZ(F_SHIFT_HZ + F_FP_CT_HZ), .F_LO_HZ(F_SHIFT_HZ)
  ) u_bank_ct (
    .clk, .rst_n, .chip_last, .waves(ct_waves)
  );

  // RF switch drive: the selected wave of the active path, off when idle.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)          rf_sw <= 1'b0;
    else if (fps_active) rf_sw <= fps_waves[fps_sel];
    else if (ct_active)  rf_sw <= ct_waves[ct_sel];
    else                 rf_sw <= 1'b0;
  end

  // Only one path may modulate at a time.
  a_one_path: assert property (@(posedge clk) disable iff (!rst_n)
    !(fps_active && ct_active));

endmodule
