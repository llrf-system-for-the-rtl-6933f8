// cordic_p2r: polar-to-rectangular CORDIC, the waveform half of every NCO.
//
// Takes a phase-accumulator value (a full turn is 2^PHASE_W) and an unsigned
// amplitude and returns amp*cos(phase) and amp*sin(phase). The top AW bits of
// the phase are used as a signed angle (pi = 2^(AW-1)); angles in the left
// half plane are first rotated by pi, then ITER rotation-mode micro-rotations
// drive the residual angle to zero. The amplitude is pre-multiplied by the
// inverse CORDIC gain (0.60725) so the outputs have the requested amplitude.
//
// Timing: fully pipelined, one sample per clock, latency ITER+2 clocks
// (one clock for pre-rotation and gain scaling, ITER rotation stages, one
// output register).
//
// The paper specifies a CORDIC polar-to-rectangular block fed by a 30-bit
// phase accumulator; widths, iteration count and pipelining are this design's
// own choices.
module cordic_p2r
  import llrf_pkg::*;
#(
  parameter int PHASE_W = 30,
  parameter int OUT_W   = 18,
  parameter int ITER    = 18
) (
  input  logic                      clk,
  input  logic [PHASE_W-1:0]        phase,
  input  logic [OUT_W-2:0]          amp,
  output logic signed [OUT_W-1:0]   cos_o,
  output logic signed [OUT_W-1:0]   sin_o
);
  localparam int AW = 24;            // internal angle width, pi = 2^(AW-1)
  localparam int XW = OUT_W + 2;     // datapath width with guard bits

  logic signed [XW-1:0] xs [ITER+1];
  logic signed [XW-1:0] ys [ITER+1];
  logic signed [AW-1:0] zs [ITER+1];

  // Stage 0: gain compensation and pi pre-rotation.
  logic [AW-1:0]        ang;
  logic [OUT_W+15:0]    amp_prod;
  logic signed [XW-1:0] amp_k;
  always_comb begin
    ang      = phase[PHASE_W-1 -: AW];
    amp_prod = amp * CORDIC_KINV_Q16[16:0];
    amp_k    = XW'(amp_prod >> 16);
  end

  always_ff @(posedge clk) begin
    ys[0] <= '0;
    if (ang[AW-1] != ang[AW-2]) begin
      xs[0] <= -amp_k;
      zs[0] <= ang ^ (AW'(1) << (AW - 1));   // subtract pi (mod 2pi)
    end else begin
      xs[0] <= amp_k;
      zs[0] <= ang;
    end
  end

  for (genvar i = 0; i < ITER; i++) begin : g_stage
    localparam logic signed [AW-1:0] ATAN_I = AW'(atan_w(i, AW));
    always_ff @(posedge clk) begin
      if (!zs[i][AW-1]) begin
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

  // Output register with saturation to OUT_W bits.
  function automatic logic signed [OUT_W-1:0] sat(input logic signed [XW-1:0] v);
    localparam logic signed [XW-1:0] MAXV = XW'((1 <<< (OUT_W - 1)) - 1);
    if (v > MAXV)       return OUT_W'(MAXV);
    else if (v < -MAXV) return OUT_W'(-MAXV);
    else                return OUT_W'(v);
  endfunction

  always_ff @(posedge clk) begin
    cos_o <= sat(xs[ITER]);
    sin_o <= sat(ys[ITER]);
  end
endmodule
