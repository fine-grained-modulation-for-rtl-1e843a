// ct_controller: FPS codeword translation.
//
// In codeword translation the tag rides on a productive Zigbee signal and
// turns its codeword into another one of the same codebook. A tag bit 1
// reverses every chip it covers: the carrier's +/-pi/2 per chip becomes
// -/+pi/2, which is the same as adding +pi during each 0.5 us chip. FPS adds
// that +pi smoothly by reflecting with a square wave of f_shift + 1 MHz for the
// chip. A tag bit 0 leaves the chips alone: the tag reflects with the plain
// f_shift wave. The carrier offset that results alternates between 0 and pi
// (phase_h); to keep it continuous the wave chosen for a chip starts at the
// current offset:
//   bit 1 : #0 (f_shift + f_FP, phase 0) or #2 (phase pi), then phase_h flips
//   bit 0 : #4 (f_shift, phase 0)        or #6 (phase pi)
// (numbering of the square_wave_bank; with F_HI = 11 MHz, F_LO = 10 MHz).
//
// One tag bit covers CHIPS_PER_BIT chips, by default a full 32-chip symbol,
// which maps symbol k to symbol k xor 8 (this grouping is this design's
// choice). Tag bits arrive on a valid/ready stream and are taken at the
// boundary that starts their first chip. Outputs change on the edge that ends
// a chip_last cycle. When no bit is offered at a bit boundary the controller
// goes idle and its offset restarts at 0.
module ct_controller #(
  parameter int unsigned CHIPS_PER_BIT = 32,
  localparam int unsigned CW = $clog2(CHIPS_PER_BIT + 1)
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       chip_last,
  input  logic       bit_valid,
  input  logic       bit_data,
  output logic       bit_ready,
  output logic       active,
  output logic [2:0] wave_sel,
  output logic       phase_h
);

  logic [CW-1:0] chips_left;   // chips of the current bit still to start
  logic          cur_bit;
  logic          phase_end;    // offset at the end of the current chip
  logic          b;            // tag bit of the chip being set up
  logic          start_h;      // offset at the start of that chip

  assign b       = (chips_left != '0) ? cur_bit : bit_data;
  assign start_h = active ? phase_end : 1'b0;

  // A new bit is needed when the current one has no chips left.
  assign bit_ready = chip_last && bit_valid && (chips_left == '0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      chips_left <= '0;
      cur_bit    <= 1'b0;
      active     <= 1'b0;
      wave_sel   <= '0;
      phase_h    <= 1'b0;
      phase_end  <= 1'b0;
    end else if (chip_last) begin
      if (chips_left != '0 || bit_valid) begin
        if (chips_left == '0) begin
          cur_bit    <= bit_data;
          chips_left <= CW'(CHIPS_PER_BIT - 1);
        end else begin
          chips_left <= chips_left - 1'b1;
        end
        active    <= 1'b1;
        phase_h   <= start_h;
        wave_sel  <= b ? {1'b0, start_h, 1'b0} : {1'b1, start_h, 1'b0};
        phase_end <= start_h ^ b;
      end else begin
        active    <= 1'b0;
        wave_sel  <= '0;
        phase_h   <= 1'b0;
        phase_end <= 1'b0;
      end
    end
  end

endmodule
