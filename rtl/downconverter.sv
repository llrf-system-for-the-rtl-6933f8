// downconverter: quadrature mixer in front of the phase detector CORDIC.
//
// Multiplies a signed ADC sample by the NCO's cos and sin and returns
//   I = x * cos(theta_nco),   Q = -x * sin(theta_nco)
// scaled by 2^-SHIFT. For an input A*cos(theta_in) the baseband part is
// (A/2)*(cos, sin)(theta_in - theta_nco), so atan2(Q, I) after low-pass
// filtering is the input phase minus the NCO phase; the sum-frequency
// product is left for the following filters.
//
// Timing: one register stage, latency 1 clock, one sample per clock.
//
// The mixer itself is the paper's; the sign convention, the widths and the
// scaling (a full-scale product maps to about half of the 20-bit range) are
// this design's choices.
module downconverter #(
  parameter int IN_W  = 14,
  parameter int LO_W  = 18,
  parameter int OUT_W = 20,
  parameter int SHIFT = 12
) (
  input  logic                    clk,
  input  logic signed [IN_W-1:0]  x,
  input  logic signed [LO_W-1:0]  lo_cos,
  input  logic signed [LO_W-1:0]  lo_sin,
  output logic signed [OUT_W-1:0] i_o,
  output logic signed [OUT_W-1:0] q_o
);
  localparam int PW = IN_W + LO_W;
  logic signed [PW-1:0] pi_s, pq_s;
  always_comb begin
    pi_s = x * lo_cos;
    pq_s = -(x * lo_sin);
  end
  always_ff @(posedge clk) begin
    i_o <= OUT_W'(pi_s >>> SHIFT);
    q_o <= OUT_W'(pq_s >>> SHIFT);
  end
endmodule
