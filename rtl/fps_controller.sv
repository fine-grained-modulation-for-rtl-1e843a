// fps_controller: picks one of the eight FPS square waves for every chip.
//
// A Zigbee receiver reads each 0.5 us chip as +pi/2 (bit 1) or -pi/2 (bit 0)
// of phase change. FPS produces that change smoothly: during the chip the tag
// reflects with a square wave of f_shift + f_FP (for +pi/2) or f_shift - f_FP
// (for -pi/2), which ramps the carrier phase by a quarter turn. For the phase
// to stay continuous the chosen wave must start the chip at the phase the
// previous chip ended on, so the controller keeps that accumulated phase
// (phase_q, in quarter turns) and chooses:
//   +pi/2 : wave #phase_q           (f_shift + f_FP, initial phase phase_q)
//   -pi/2 : wave #(4 + (-phase_q mod 4)) (f_shift - f_FP; the f_shift - f_FP
//           waves are numbered 0, 3pi/2, pi, pi/2)
// and then moves phase_q one quarter up or down. Example from the published
// description: going from pi/2 to pi selects wave #1.
//
// Interface: chip directions arrive on a valid/ready stream and are taken only
// on chip boundaries (chip_ready = chip_last & chip_valid). wave_sel, active
// and phase_q change on the clock edge that ends the chip_last cycle and hold
// for the whole following chip. With no chip offered the controller goes idle
// (active low, RF switch off) and its phase restarts at 0 - both choices of
// this design.
module fps_controller (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       chip_last,
  input  logic       chip_valid,
  input  logic       chip_dir,
  output logic       chip_ready,
  output logic       active,
  output logic [2:0] wave_sel,
  output logic [1:0] phase_q
);

  // Phase at the end of the current chip = phase at the start of the next.
  logic [1:0] phase_end;
  logic [1:0] start_q;   // phase at the start of the chip being set up

  assign start_q    = active ? phase_end : 2'd0;
  assign chip_ready = chip_last && chip_valid;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active    <= 1'b0;
      wave_sel  <= '0;
      phase_q   <= '0;
      phase_end <= '0;
    end else if (chip_last) begin
      if (chip_valid) begin
        active   <= 1'b1;
        phase_q  <= start_q;
        wave_sel <= chip_dir ? {1'b0, start_q} : {1'b1, 2'(-start_q)};
        phase_end <= chip_dir ? start_q + 2'd1 : start_q - 2'd1;
      end else begin
        active    <= 1'b0;
        wave_sel  <= '0;
        phase_q   <= '0;
        phase_end <= '0;
      end
    end
  end

endmodule
