// iir_lpf: first-order low-pass IIR section with a zero at Nyquist.
//
//   y[n] = y[n-1] + ( (x[n] + x[n-1])/2 - y[n-1] ) * 2^-K
//
// i.e. H(z) = b(1 + z^-1)/(1 - a z^-1) with a = 1 - 2^-K, b = 2^-K/2, unity
// gain at DC and a zero at half the sample rate. This is the shape of a
// first-order Chebyshev Type II low-pass; the paper names that filter type
// but gives no coefficients, so the multiplier-free power-of-two form and K
// are this design's choices. The state keeps K extra fraction bits so small
// inputs are not lost.
//
// Timing: in_valid qualifies x; y is updated one clock after each accepted
// input (latency 1 clock).
module iir_lpf #(
  parameter int W = 24,
  parameter int K = 8
) (
  input  logic                clk,
  input  logic                rst,
  input  logic                in_valid,
  input  logic signed [W-1:0] x,
  output logic signed [W-1:0] y
);
  localparam int SW = W + K + 1;
  logic signed [W-1:0]  x_prev;
  logic signed [SW-1:0] acc;        // y with K fraction bits
  logic signed [SW-1:0] acc_next;
  logic signed [SW-1:0] xin;        // (x + x_prev)/2 with K fraction bits

  always_comb begin
    xin      = (SW'(x) + SW'(x_prev)) <<< (K - 1);
    acc_next = acc + ((xin - acc) >>> K);
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      x_prev <= '0;
      acc    <= '0;
    end else if (in_valid) begin
      x_prev <= x;
      acc    <= acc_next;
    end
  end

  always_comb y = W'(acc >>> K);
endmodule
