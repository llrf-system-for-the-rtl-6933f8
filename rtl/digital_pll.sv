// digital_pll: multiplier-based digital PLL locked to the sampled 52.8 MHz RF.
//
// The 52.8 MHz Recycler RF, sampled by a 14-bit ADC at the 50 MHz system
// clock (it aliases to 2.8 MHz), is compared with the internal h=588 phase.
// Loop, in order:
//   harmonic_nco.ph588 -> cordic_p2r (NCO waveform) -> downconverter
//   -> cic_filter (length-9 moving sum, zero at 5.56 MHz) and iir_lpf on I
//      and Q, removing the 5.6 MHz sum-frequency product
//   -> cordic_r2p (phase error, +-pi = +-2^21)
//   -> loop_filter (pole 500 Hz, zero 738 Hz) -> gain_adjust (>> gain_shift)
//   -> fm, added to the h=1 increment of harmonic_nco.
// The x28 and x21 increment multipliers put a factor 588 into the loop, so
// the loop gain is K = (2^21/pi) * 588 * (2pi*50e6/2^30) = 1.15e8 at
// gain_shift 0 and about 1e5 (100 dB) at gain_shift 10, the paper's setting.
// The h=1, h=28 and h=588 phases are kept aligned by harmonic_nco; ph28
// carries offset28, the bucket-zero alignment offset.
//
// The ADC sample is delayed by the NCO CORDIC latency so the mixer sees the
// sample and the NCO value of the same clock; when locked, ph588 therefore
// matches the phase of the sampled input (the input taken as a cosine).
// The filters act on I and Q ahead of the CORDIC, as in the marker path; the
// paper says only that the downconverter output is low-pass filtered.
//
// Timing: free-running, one sample per clock; loop delay about 50 clocks.
module digital_pll
  import llrf_pkg::*;
#(
  parameter int CORDIC_ITER = 18,
  parameter int IIR_K       = 8
) (
  input  logic                     clk,
  input  logic                     rst,
  input  logic signed [ADC_W-1:0]  rf_in,
  input  logic [PHASE_W-1:0]       nom_inc,
  input  logic [4:0]               gain_shift,
  input  logic [PHASE_W-1:0]       offset28,
  output logic [PHASE_W-1:0]       ph1,
  output logic [PHASE_W-1:0]       ph28,
  output logic [PHASE_W-1:0]       ph588,
  output logic signed [PH_W-1:0]   phase_err,
  output logic signed [PH_W-1:0]   fm
);
  localparam int LO_W  = 18;
  localparam int CIC_W = IQ_W + $clog2(9);     // 24 bits

  logic signed [LO_W-1:0]  lo_cos, lo_sin;
  logic signed [ADC_W-1:0] rf_d;
  logic signed [IQ_W-1:0]  mix_i, mix_q;
  logic signed [CIC_W-1:0] cic_i, cic_q, iir_i, iir_q;
  logic                    cic_vi, cic_vq;
  logic signed [IQ_W-1:0]  pd_i, pd_q;
  logic signed [PH_W-1:0]  lf_out;
  logic [IQ_W+1:0]         pd_mag;

  cordic_p2r #(.PHASE_W(PHASE_W), .OUT_W(LO_W), .ITER(CORDIC_ITER)) u_nco (
    .clk, .phase(ph588), .amp({(LO_W-1){1'b1}}), .cos_o(lo_cos), .sin_o(lo_sin));

  delay_line #(.W(ADC_W), .D(CORDIC_ITER + 2)) u_align (.clk, .d(rf_in), .q(rf_d));

  downconverter #(.IN_W(ADC_W), .LO_W(LO_W), .OUT_W(IQ_W), .SHIFT(12)) u_mix (
    .clk, .x(rf_d), .lo_cos, .lo_sin, .i_o(mix_i), .q_o(mix_q));

  cic_filter #(.IN_W(IQ_W), .STAGES(1), .M(9), .R(1)) u_cic_i (
    .clk, .rst, .in_valid(1'b1), .x(mix_i), .out_valid(cic_vi), .y(cic_i));
  cic_filter #(.IN_W(IQ_W), .STAGES(1), .M(9), .R(1)) u_cic_q (
    .clk, .rst, .in_valid(1'b1), .x(mix_q), .out_valid(cic_vq), .y(cic_q));

  iir_lpf #(.W(CIC_W), .K(IIR_K)) u_iir_i (.clk, .rst, .in_valid(cic_vi), .x(cic_i), .y(iir_i));
  iir_lpf #(.W(CIC_W), .K(IIR_K)) u_iir_q (.clk, .rst, .in_valid(cic_vq), .x(cic_q), .y(iir_q));

  // The moving sum has a gain of 9; dividing by 8 keeps a full-scale input
  // inside the 20-bit CORDIC range.
  always_comb begin
    pd_i = IQ_W'(iir_i >>> 3);
    pd_q = IQ_W'(iir_q >>> 3);
  end

  cordic_r2p #(.IN_W(IQ_W), .PH_W(PH_W), .ITER(20)) u_pd (
    .clk, .x_i(pd_i), .y_i(pd_q), .phase_o(phase_err), .mag_o(pd_mag));

  loop_filter #(.W(PH_W)) u_lf (.clk, .rst, .x(phase_err), .y(lf_out));

  gain_adjust #(.W(PH_W)) u_gain (.clk, .rst, .x(lf_out), .shift(gain_shift), .y(fm));

  harmonic_nco #(.FM_W(PH_W)) u_acc (
    .clk, .rst, .nom_inc, .fm, .offset28, .ph1, .ph28, .ph588);
endmodule
