// delay_line: fixed delay of a signed sample by D clocks (D >= 1).
//
// Used to line up an ADC sample with the NCO waveform it is mixed with: the
// NCO's CORDIC takes ITER+2 clocks, so the sample is delayed by the same
// amount and the mixer sees both from the same clock. Shift register, one
// sample per clock, latency D.
module delay_line #(
  parameter int W = 14,
  parameter int D = 20
) (
  input  logic                clk,
  input  logic signed [W-1:0] d,
  output logic signed [W-1:0] q
);
  logic signed [W-1:0] sr [D];
  always_ff @(posedge clk) begin
    sr[0] <= d;
    for (int k = 1; k < D; k++) sr[k] <= sr[k-1];
  end
  always_comb q = sr[D-1];
endmodule
