// marker_phase_detector: phase of the bucket-zero (RRAA) marker against the
// internal revolution (h=1) phase.
//
// The RRAA marker is a narrow pulse once per Recycler revolution
// (89.8 kHz). Its digitised samples are mixed with an NCO driven by the
// PLL's h=1 phase; the fundamental of the pulse train lands at DC with the
// phase -theta1(t_marker), the h=1 phase at the marker's centre taken
// negative. Chain: cordic_p2r (h=1 NCO) -> downconverter -> iir_lpf on I
// and Q -> decimating cic_filter (2 stages, R = 557 samples, one
// revolution, so the harmonics of the revolution frequency fall on its
// zeros) -> cordic_r2p. The result (+-pi = +-2^21) is the negated h=1
// phase at the marker; multiplied by 28 it is the offset that puts the
// 2.5 MHz phase at zero on bucket zero (see phase_correction).
//
// The marker sample is delayed by the NCO CORDIC latency so that sample and
// NCO value belong to the same clock. The processing chain is the paper's;
// filter orders, coefficients, the decimation ratio and the scaling are this
// design's choices.
//
// Timing: a new phase (valid_o pulse) every CIC_R clocks, ITER+3 clocks
// after the CIC output.
module marker_phase_detector
  import llrf_pkg::*;
#(
  parameter int CIC_R       = 557,
  parameter int CIC_STAGES  = 2,
  parameter int IIR_K       = 2,
  parameter int CORDIC_ITER = 18
) (
  input  logic                     clk,
  input  logic                     rst,
  input  logic signed [ADC_W-1:0]  marker_in,
  input  logic [PHASE_W-1:0]       ph1,
  output logic signed [PH_W-1:0]   phase_o,
  output logic                     valid_o
);
  localparam int LO_W  = 18;
  localparam int CIC_W = IQ_W + CIC_STAGES * $clog2(CIC_R);
  // Scale so that a full-height 7-sample pulse per revolution gives about
  // 2^18 at the CORDIC input: the CIC gain is CIC_R^CIC_STAGES.
  localparam int OSHIFT = CIC_STAGES * $clog2(CIC_R) - 8;
  localparam int LAT    = 20 + 3;   // cordic_r2p latency (ITER 20) plus margin

  logic signed [LO_W-1:0]  lo_cos, lo_sin;
  logic signed [ADC_W-1:0] mk_d;
  logic signed [IQ_W-1:0]  mix_i, mix_q, iir_i, iir_q;
  logic signed [CIC_W-1:0] cic_i, cic_q;
  logic                    cic_vi, cic_vq;
  logic signed [IQ_W-1:0]  pd_i, pd_q;
  logic [IQ_W+1:0]         pd_mag;
  logic [LAT-1:0]          vpipe;

  cordic_p2r #(.PHASE_W(PHASE_W), .OUT_W(LO_W), .ITER(CORDIC_ITER)) u_nco (
    .clk, .phase(ph1), .amp({(LO_W-1){1'b1}}), .cos_o(lo_cos), .sin_o(lo_sin));

  delay_line #(.W(ADC_W), .D(CORDIC_ITER + 2)) u_align (.clk, .d(marker_in), .q(mk_d));

  downconverter #(.IN_W(ADC_W), .LO_W(LO_W), .OUT_W(IQ_W), .SHIFT(12)) u_mix (
    .clk, .x(mk_d), .lo_cos, .lo_sin, .i_o(mix_i), .q_o(mix_q));

  iir_lpf #(.W(IQ_W), .K(IIR_K)) u_iir_i (.clk, .rst, .in_valid(1'b1), .x(mix_i), .y(iir_i));
  iir_lpf #(.W(IQ_W), .K(IIR_K)) u_iir_q (.clk, .rst, .in_valid(1'b1), .x(mix_q), .y(iir_q));

  cic_filter #(.IN_W(IQ_W), .STAGES(CIC_STAGES), .M(1), .R(CIC_R)) u_cic_i (
    .clk, .rst, .in_valid(1'b1), .x(iir_i), .out_valid(cic_vi), .y(cic_i));
  cic_filter #(.IN_W(IQ_W), .STAGES(CIC_STAGES), .M(1), .R(CIC_R)) u_cic_q (
    .clk, .rst, .in_valid(1'b1), .x(iir_q), .out_valid(cic_vq), .y(cic_q));

  function automatic logic signed [IQ_W-1:0] scale(input logic signed [CIC_W-1:0] v);
    logic signed [CIC_W-1:0] s;
    localparam logic signed [CIC_W-1:0] MAXV = CIC_W'((1 <<< (IQ_W - 1)) - 1);
    s = v >>> OSHIFT;
    if (s > MAXV)       return IQ_W'(MAXV);
    else if (s < -MAXV) return IQ_W'(-MAXV);
    else                return IQ_W'(s);
  endfunction

  // Hold the decimated I/Q between CIC outputs.
  always_ff @(posedge clk) begin
    if (rst) begin
      pd_i  <= '0;
      pd_q  <= '0;
      vpipe <= '0;
    end else begin
      if (cic_vi) begin
        pd_i <= scale(cic_i);
        pd_q <= scale(cic_q);
      end
      vpipe <= {vpipe[LAT-2:0], cic_vi};
    end
  end

  cordic_r2p #(.IN_W(IQ_W), .PH_W(PH_W), .ITER(20)) u_pd (
    .clk, .x_i(pd_i), .y_i(pd_q), .phase_o(phase_o), .mag_o(pd_mag));

  always_comb valid_o = vpipe[LAT-1];
endmodule
