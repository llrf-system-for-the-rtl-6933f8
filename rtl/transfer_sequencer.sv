// transfer_sequencer: turn-by-turn timing of a beam transfer to the
// Delivery Ring.
//
// All timing is counted in Recycler turns, one turn per bucket-zero (RRAA)
// marker pulse (11.1 us). After an extraction event the sequencer waits for
// the next marker, emits the extraction sync pulse there (turn 0) and counts
// markers:
//   turn DISABLE_TURN : RF drive and AC dipole outputs disabled
//   turn RESET_TURN   : Delivery Ring NCO reset pulse (drive is off)
//   turn ENABLE_TURN  : RF drive and AC dipole outputs enabled again
//   turn KICK_TURN    : kicker-fire pulse, sequence ends
// The 90-turn (about 1 ms) magnet-off and magnet-on delays, the 180-turn
// (about 2 ms) kicker charge, and re-enabling the drive one turn after the
// NCO reset are the paper's. The turn of the disable (the paper only places
// it before the NCO reset), ignoring events while a sequence runs, and the
// pulse encoding are this design's choices.
//
// Timing: every output pulse is one clock wide and falls on the clock of
// the marker pulse that completes its turn count; rf_enable and
// acdipole_enable change on the same clock.
module transfer_sequencer #(
  parameter int DISABLE_TURN = 1,
  parameter int RESET_TURN   = 89,
  parameter int ENABLE_TURN  = 90,
  parameter int KICK_TURN    = 180
) (
  input  logic clk,
  input  logic rst,
  input  logic marker,
  input  logic extr_event,
  output logic extr_sync,
  output logic rf_enable,
  output logic acdipole_enable,
  output logic nco_reset,
  output logic kick,
  output logic busy
);
  typedef enum logic [1:0] {IDLE, ARMED, RUN} state_t;
  state_t state;
  logic [$clog2(KICK_TURN+1)-1:0] turn;

  always_ff @(posedge clk) begin
    if (rst) begin
      state           <= IDLE;
      turn            <= '0;
      extr_sync       <= 1'b0;
      nco_reset       <= 1'b0;
      kick            <= 1'b0;
      rf_enable       <= 1'b1;
      acdipole_enable <= 1'b1;
    end else begin
      extr_sync <= 1'b0;
      nco_reset <= 1'b0;
      kick      <= 1'b0;
      unique case (state)
        IDLE:  if (extr_event) state <= ARMED;
        ARMED: if (marker) begin
          extr_sync <= 1'b1;
          turn      <= '0;
          state     <= RUN;
        end
        RUN:   if (marker) begin
          turn <= turn + 1'b1;
          if (int'(turn) + 1 == DISABLE_TURN) begin
            rf_enable       <= 1'b0;
            acdipole_enable <= 1'b0;
          end
          if (int'(turn) + 1 == RESET_TURN) nco_reset <= 1'b1;
          if (int'(turn) + 1 == ENABLE_TURN) begin
            rf_enable       <= 1'b1;
            acdipole_enable <= 1'b1;
          end
          if (int'(turn) + 1 == KICK_TURN) begin
            kick  <= 1'b1;
            state <= IDLE;
          end
        end
        default: state <= IDLE;
      endcase
    end
  end

  always_comb busy = (state != IDLE);

  // The sequence only makes sense in this order.
  initial begin
    assert (DISABLE_TURN > 0 && DISABLE_TURN < RESET_TURN &&
            RESET_TURN < ENABLE_TURN && ENABLE_TURN < KICK_TURN)
      else $error("transfer_sequencer: turn parameters out of order");
  end
endmodule
