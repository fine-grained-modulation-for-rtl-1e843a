// square_wave_bank: the eight square waves the tag toggles between.
//
// Two phase accumulators run at F_HI_HZ and F_LO_HZ. Each restarts from zero
// at every chip boundary, so a wave's phase at the start of a chip is exactly
// its nominal initial phase. Adding the quarter-turn offsets 0, pi/2, pi and
// 3pi/2 to each accumulator gives the eight waves, numbered as in the
// published wave table:
//   #0..#3 : F_HI_HZ with initial phase 0, pi/2, pi, 3pi/2
//   #4..#7 : F_LO_HZ with initial phase 0, 3pi/2, pi, pi/2
// With the defaults (10.5 MHz and 9.5 MHz, i.e. f_shift +/- 500 kHz) this is
// the FPS set; with 11 MHz and 10 MHz the phase-0 and phase-pi members
// (#0, #2, #4, #6) are the four waves of codeword translation.
//
// Phase is kept in units of 1/PHASE_MOD of a turn, PHASE_MOD =
// F_CLK_HZ / F_RES_HZ, and each accumulator adds F/F_RES_HZ units per clock,
// so all arithmetic is exact. A wave is 1 while its phase is in [0, pi) and 0
// otherwise (this polarity is this design's choice). Outputs are
// combinational from registered accumulators; restart happens on the clock
// edge that ends the cycle where chip_last is high.
module square_wave_bank #(
  parameter int unsigned F_CLK_HZ = fps_pkg::F_CLK_HZ,
  parameter int unsigned F_RES_HZ = fps_pkg::F_RES_HZ,
  parameter int unsigned F_HI_HZ  = fps_pkg::F_SHIFT_HZ + fps_pkg::F_FP_HZ,
  parameter int unsigned F_LO_HZ  = fps_pkg::F_SHIFT_HZ - fps_pkg::F_FP_HZ
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       chip_last,
  output logic [7:0] waves
);

  localparam int unsigned PHASE_MOD = F_CLK_HZ / F_RES_HZ;
  localparam int unsigned QUARTER   = PHASE_MOD / 4;
  localparam int unsigned HALF      = PHASE_MOD / 2;
  localparam int unsigned PW        = $clog2(PHASE_MOD + 1) + 1;
  localparam int unsigned INC_HI    = F_HI_HZ / F_RES_HZ;
  localparam int unsigned INC_LO    = F_LO_HZ / F_RES_HZ;

  // Phase offsets in quarter turns, in the order of the wave numbering.
  localparam int unsigned OFS_HI [4] = '{0, 1, 2, 3};
  localparam int unsigned OFS_LO [4] = '{0, 3, 2, 1};

  logic [PW-1:0] acc_hi, acc_lo;

  // Modular add: a + b where both are below PHASE_MOD.
  function automatic logic [PW-1:0] mod_add(input logic [PW-1:0] a, input logic [PW-1:0] b);
    logic [PW:0] s;
    s = {1'b0, a} + {1'b0, b};
    if (s >= (PW+1)'(PHASE_MOD)) s = s - (PW+1)'(PHASE_MOD);
    return s[PW-1:0];
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc_hi <= '0;
      acc_lo <= '0;
    end else if (chip_last) begin
      acc_hi <= '0;
      acc_lo <= '0;
    end else begin
      acc_hi <= mod_add(acc_hi, PW'(INC_HI % PHASE_MOD));
      acc_lo <= mod_add(acc_lo, PW'(INC_LO % PHASE_MOD));
    end
  end

  always_comb begin
    for (int k = 0; k < 4; k++) begin
      waves[k]   = mod_add(acc_hi, PW'(OFS_HI[k] * QUARTER)) < PW'(HALF);
      waves[k+4] = mod_add(acc_lo, PW'(OFS_LO[k] * QUARTER)) < PW'(HALF);
    end
  end

  initial begin
    assert (F_CLK_HZ % F_RES_HZ == 0 && PHASE_MOD % 4 == 0)
      else $error("phase resolution must divide the clock into a multiple of 4 units");
    assert (F_HI_HZ % F_RES_HZ == 0 && F_LO_HZ % F_RES_HZ == 0)
      else $error("wave frequencies must be multiples of the phase resolution");
  end

endmodule
