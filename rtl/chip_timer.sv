// chip_timer: 0.5 us chip clock of the tag.
//
// Counts FPGA clock cycles modulo CLKS_PER_CHIP (50 at 100 MHz, giving the
// 0.5 us Zigbee chip) and raises chip_last in the final cycle of every chip.
// Everything that changes per chip (wave selection, phase accumulators)
// updates on the clock edge at the end of that cycle, so a new chip takes
// effect exactly on the chip boundary.
//
// A sync pulse restarts the count: the cycle after sync is cycle 0 of a new
// chip. The chip length is the paper's; the clock rate and the sync input
// (for lining chip boundaries up with an incoming carrier) are this design's.
module chip_timer #(
  parameter int unsigned CLKS_PER_CHIP = fps_pkg::CLKS_PER_CHIP,
  localparam int unsigned CW = $clog2(CLKS_PER_CHIP)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          sync,
  output logic          chip_last,
  output logic [CW-1:0] chip_cnt
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)              chip_cnt <= '0;
    else if (sync)           chip_cnt <= '0;
    else if (chip_last)      chip_cnt <= '0;
    else                     chip_cnt <= chip_cnt + 1'b1;
  end

  assign chip_last = (chip_cnt == CW'(CLKS_PER_CHIP - 1)) && !sync;

endmodule
