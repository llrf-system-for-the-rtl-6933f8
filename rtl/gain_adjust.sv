// gain_adjust: bit-shift loop gain attenuator ("PLL Gain Adj").
//
// Divides the filtered phase error by 2^shift with an arithmetic right
// shift, lowering the loop gain by 6 dB per bit. At shift = 0 the loop gain
// is its maximum, about 1.15e8 (161 dB); the paper's design point of 100 dB
// needs shift = 10. Shifts above MAX_SHIFT (20 bits, about 120 dB) are
// clamped. Right shift only, as in the paper; the clamp is this design's.
//
// Timing: registered output, latency 1 clock.
module gain_adjust #(
  parameter int W         = 22,
  parameter int MAX_SHIFT = 20
) (
  input  logic                clk,
  input  logic                rst,
  input  logic signed [W-1:0] x,
  input  logic [4:0]          shift,
  output logic signed [W-1:0] y
);
  logic [4:0] sh;
  always_comb sh = (int'(shift) > MAX_SHIFT) ? 5'(MAX_SHIFT) : shift;
  always_ff @(posedge clk) begin
    if (rst) y <= '0;
    else     y <= x >>> sh;
  end
endmodule
