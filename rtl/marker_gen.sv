// marker_gen: bucket-location marker pulses from a phase accumulator.
//
// Emits a pulse WIDTH clocks long each time the phase wraps through zero
// (the MSB falls from 1 to 0). Driven by the aligned h=1 phase it gives a
// once-per-turn bucket-zero marker; driven by the h=28 phase, a marker per
// 2.5 MHz bucket. The default width of 7 clocks (140 ns) matches the
// roughly 130 ns width of the Recycler's RRAA marker. The paper says such
// markers are generated in the FPGA; the wrap detection and width are this
// design's choices.
//
// Timing: the pulse starts 1 clock after the phase sample that wrapped.
module marker_gen
  import llrf_pkg::*;
#(
  parameter int WIDTH = 7
) (
  input  logic               clk,
  input  logic               rst,
  input  logic [PHASE_W-1:0] phase,
  output logic               marker
);
  logic msb_d;
  logic [$clog2(WIDTH+1)-1:0] cnt;

  always_ff @(posedge clk) begin
    if (rst) begin
      msb_d <= 1'b0;
      cnt   <= '0;
    end else begin
      msb_d <= phase[PHASE_W-1];
      if (msb_d && !phase[PHASE_W-1]) cnt <= WIDTH[$bits(cnt)-1:0];
      else if (cnt != 0)              cnt <= cnt - 1'b1;
    end
  end
  always_comb marker = (cnt != 0);
endmodule
