// rf_drive: one RF drive DAC channel.
//
// Turns a phase-accumulator value and an amplitude into a cosine through
// cordic_p2r and reduces it to the 14-bit DAC word. When enable is low the
// word is 0, so the cavity drive is off. The paper gives the DAC width and
// that the drive is switched off around the Delivery Ring NCO reset; the
// rest is this design's choice.
//
// Timing: DAC word latency ITER+3 clocks from phase; enable acts on the
// output register (1 clock).
module rf_drive
  import llrf_pkg::*;
#(
  parameter int OUT_W = 18,
  parameter int ITER  = 18
) (
  input  logic                     clk,
  input  logic                     rst,
  input  logic [PHASE_W-1:0]       phase,
  input  logic [OUT_W-2:0]         amp,
  input  logic                     enable,
  output logic signed [DAC_W-1:0]  dac
);
  logic signed [OUT_W-1:0] c, s;
  cordic_p2r #(.PHASE_W(PHASE_W), .OUT_W(OUT_W), .ITER(ITER)) u_cordic (
    .clk, .phase, .amp, .cos_o(c), .sin_o(s));

  always_ff @(posedge clk) begin
    if (rst || !enable) dac <= '0;
    else                dac <= DAC_W'(c >>> (OUT_W - DAC_W));
  end
endmodule
