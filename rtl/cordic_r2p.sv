// cordic_r2p: rectangular-to-polar CORDIC, the angle half of the phase detector.
//
// Takes signed I (x_i) and Q (y_i) of IN_W bits and returns the angle
// atan2(Q, I) as a signed PH_W-bit number in which +-pi is +-2^(PH_W-1),
// together with the magnitude multiplied by the CORDIC gain (about 1.6468).
// Inputs with I < 0 are first rotated by pi; ITER vectoring micro-rotations
// then drive Q to zero while accumulating the angle.
//
// Timing: fully pipelined, one sample per clock, latency ITER+2 clocks.
//
// The 20-bit input and 22-bit (+-pi) output follow the paper's phase detector
// (its gain K1 = 2^21/pi counts per radian); pipelining and the iteration
// count are this design's choices.
module cordic_r2p
  import llrf_pkg::*;
#(
  parameter int IN_W = 20,
  parameter int PH_W = 22,
  parameter int ITER = 20
) (
  input  logic                     clk,
  input  logic signed [IN_W-1:0]   x_i,
  input  logic signed [IN_W-1:0]   y_i,
  output logic signed [PH_W-1:0]   phase_o,
  output logic        [IN_W+1:0]   mag_o
);
  localparam int GB = 4;             // guard LSBs against truncation in the shifts
  localparam int XW = IN_W + 3 + GB; // room for the 1.65 CORDIC gain and the sign
  localparam int AW = PH_W + 2;      // guard bits on the angle accumulator

  logic signed [XW-1:0] xs [ITER+1];
  logic signed [XW-1:0] ys [ITER+1];
  logic signed [AW-1:0] zs [ITER+1];

  always_ff @(posedge clk) begin
    if (x_i < 0) begin
      xs[0] <= -(XW'(x_i) <<< GB);
      ys[0] <= -(XW'(y_i) <<< GB);
      zs[0] <= AW'(1) <<< (AW - 1);   // start at pi (= -pi modulo 2pi)
    end else begin
      xs[0] <= XW'(x_i) <<< GB;
      ys[0] <= XW'(y_i) <<< GB;
      zs[0] <= '0;
    end
  end

  for (genvar i = 0; i < ITER; i++) begin : g_stage
    localparam logic signed [AW-1:0] ATAN_I = AW'(atan_w(i, AW));
    always_ff @(posedge clk) begin
      if (ys[i] < 0) begin
        xs[i+1] <= xs[i] - (ys[i] >>> i);
        ys[i+1] <= ys[i] + (xs[i] >>> i);
        zs[i+1] <= zs[i] - ATAN_I;
      end else begin
        xs[i+1] <= xs[i] + (ys[i] >>> i);
        ys[i+1] <= ys[i] - (xs[i] >>> i);
        zs[i+1] <= zs[i] + ATAN_I;
      end
    end
  end

  // Round the angle to PH_W bits (wraps modulo 2pi).
  logic [AW-1:0] z_rnd;
  always_comb z_rnd = zs[ITER] + AW'(2);

  always_ff @(posedge clk) begin
    phase_o <= z_rnd[AW-1:2];
    mag_o   <= (IN_W+2)'(xs[ITER] >>> GB);
  end
endmodule
