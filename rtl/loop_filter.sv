// loop_filter: single-zero, single-pole (lag-lead) PLL loop filter.
//
// Implements F(s) = (1 + s/w2)/(1 + s/w1) with w1 = 2pi*500 rad/s and
// w2 = 2pi*738 rad/s at Ts = 20 ns, discretised by matched-z:
//   y[n] = A1*y[n-1] + G*x[n] - GA2*x[n-1]
// with A1 = exp(-w1 Ts), A2 = exp(-w2 Ts), G = (1-A1)/(1-A2) (unity DC
// gain, as F(0) = 1) and GA2 = G*A2. Coefficients are Q2.30 integers.
// The state y keeps FB extra fraction bits so that the very small
// (1 - A1) = 6.3e-5 feedback step does not dead-band; the output is
// rounded toward minus infinity and saturated to W bits.
//
// The pole and zero, and the choice of w2 for a damping factor of 2 at a
// loop gain of 1e5 (100 dB), are the paper's. The paper prints the z-domain
// form with '+' signs, F(z) = (1 + e^{-w2Ts} z^-1)/(1 + e^{-w1Ts} z^-1),
// which would put the pole at z = -0.99994 (a resonance at Nyquist) rather
// than match its own low-pass F(s); this module follows F(s). The DC gain
// normalisation and the fixed-point format are this design's choices.
//
// Timing: one new output every clock, latency 1 clock.
module loop_filter #(
  parameter int W               = 22,
  parameter int FB              = 24,
  parameter longint A1          = 1073674361,  // exp(-2pi*500*20ns) * 2^30
  parameter longint G           = 727478239,   // (1-A1)/(1-A2) * 2^30
  parameter longint GA2         = 727410776    // G * exp(-2pi*738*20ns) * 2^30
) (
  input  logic                clk,
  input  logic                rst,
  input  logic signed [W-1:0] x,
  output logic signed [W-1:0] y
);
  localparam int SW = W + FB + 2;     // state width: value * 2^FB plus headroom
  localparam int PW = SW + 34;        // product width

  logic signed [SW-1:0] st;           // y * 2^FB
  logic signed [W-1:0]  x_prev;
  logic signed [PW-1:0] p_fb, p_x, p_xp, sum;
  logic signed [SW-1:0] st_next;
  logic signed [SW-1:0] y_full;

  localparam logic signed [SW-1:0] YMAX = SW'(((64'sd1 <<< (W - 1)) - 1) <<< FB);
  localparam logic signed [SW-1:0] YMIN = SW'((-(64'sd1 <<< (W - 1))) <<< FB);

  always_comb begin
    p_fb = PW'(st) * PW'(A1);
    p_x  = (PW'(x) <<< FB) * PW'(G);
    p_xp = (PW'(x_prev) <<< FB) * PW'(GA2);
    sum  = (p_fb + p_x - p_xp) >>> 30;
    // Saturate the state so an overload cannot wrap around.
    if (sum > PW'(YMAX))      st_next = YMAX;
    else if (sum < PW'(YMIN)) st_next = YMIN;
    else                      st_next = SW'(sum);
    y_full = st >>> FB;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      st     <= '0;
      x_prev <= '0;
    end else begin
      st     <= st_next;
      x_prev <= x;
    end
  end

  always_comb y = W'(y_full);
endmodule
