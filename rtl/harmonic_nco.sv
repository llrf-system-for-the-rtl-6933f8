// harmonic_nco: the three phase accumulators of the digital PLL.
//
// One 30-bit accumulator runs at the revolution frequency (h=1, 89.8 kHz),
// one at h=28 (2.5 MHz) and one at h=588 (52.8 MHz). The h=1 increment is
// the nominal increment plus the loop's frequency-modulation word fm (added
// at the LSB); the h=28 increment is 28 times it and the h=588 increment 21
// times that, all modulo 2^30. Because all three accumulators start at zero
// together and always advance by exactly proportional increments, the
// identities ph28 = 28*ph1 and ph588 = 588*ph1 (mod 2^30) hold at every
// clock: the three waveforms are phase aligned, and the loop, which closes on
// ph588, steers all of them. The h=28 output carries an extra phase offset
// (offset28) used to align the 2.5 MHz RF with the bucket-zero marker; it
// does not enter the loop.
//
// Timing: the increments are registered once, so a change of nom_inc or fm
// reaches the phases after 2 clocks; ph outputs are registers updated every
// clock. The accumulator structure and the x28, x21 chain are the paper's;
// where the offset is added and the pipelining are this design's choices.
module harmonic_nco
  import llrf_pkg::*;
#(
  parameter int FM_W = 22
) (
  input  logic                    clk,
  input  logic                    rst,
  input  logic [PHASE_W-1:0]      nom_inc,
  input  logic signed [FM_W-1:0]  fm,
  input  logic [PHASE_W-1:0]      offset28,
  output logic [PHASE_W-1:0]      ph1,
  output logic [PHASE_W-1:0]      ph28,
  output logic [PHASE_W-1:0]      ph588
);
  logic [PHASE_W-1:0] inc1, inc28, inc588;
  logic [PHASE_W-1:0] inc1_c, inc28_c, inc588_c;
  logic [PHASE_W-1:0] acc1, acc28, acc588;

  always_comb begin
    inc1_c   = nom_inc + PHASE_W'(fm);
    inc28_c  = PHASE_W'(inc1_c * PHASE_W'(H28));
    inc588_c = PHASE_W'(inc28_c * PHASE_W'(H21));
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      inc1 <= '0; inc28 <= '0; inc588 <= '0;
      acc1 <= '0; acc28 <= '0; acc588 <= '0;
      ph28 <= '0;
    end else begin
      inc1   <= inc1_c;
      inc28  <= inc28_c;
      inc588 <= inc588_c;
      acc1   <= acc1 + inc1;
      acc28  <= acc28 + inc28;
      acc588 <= acc588 + inc588;
      ph28   <= acc28 + inc28 + offset28;
    end
  end

  always_comb begin
    ph1   = acc1;
    ph588 = acc588;
  end
endmodule
