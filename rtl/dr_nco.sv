// dr_nco: Delivery Ring NCO phase accumulator with reset to a tunable phase.
//
// The Delivery Ring RF (2.36 MHz) is not harmonically related to the
// Recycler's 2.5 MHz, so instead of locking to it the NCO is restarted in
// step with the Recycler bucket-zero marker before every transfer. On
// nco_reset the accumulator is loaded with base_offset plus the advance
// accumulated so far; the advance then grows by adv_step. For consecutive
// bunches, 397.7 ns apart at 2.5 MHz, adv_step = 337.9 deg keeps each one
// landing at the same Delivery Ring phase. cycle_reset (the machine-cycle
// start) clears the advance; base_offset tunes the injection phase.
//
// Reset-to-offset, the per-bunch advance and the 337.9 deg value are the
// paper's; clearing the advance on the machine-cycle reset and the exact
// order of load and advance are this design's choices.
//
// Timing: phase is a register; the load takes effect on the clock after
// nco_reset, and the phase then advances by inc every clock.
module dr_nco
  import llrf_pkg::*;
(
  input  logic                clk,
  input  logic                rst,
  input  logic [PHASE_W-1:0]  inc,
  input  logic [PHASE_W-1:0]  base_offset,
  input  logic [PHASE_W-1:0]  adv_step,
  input  logic                cycle_reset,
  input  logic                nco_reset,
  output logic [PHASE_W-1:0]  phase
);
  logic [PHASE_W-1:0] adv;

  always_ff @(posedge clk) begin
    if (rst) begin
      phase <= '0;
      adv   <= '0;
    end else begin
      if (nco_reset) begin
        phase <= base_offset + adv;
        adv   <= adv + adv_step;
      end else begin
        phase <= phase + inc;
      end
      if (cycle_reset) adv <= '0;
    end
  end
endmodule
