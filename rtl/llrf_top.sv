// llrf_top: FPGA logic of the Recycler 2.5 MHz / Delivery Ring 2.36 MHz LLRF.
//
// One 50 MHz clock domain. Blocks and connections:
//  * digital_pll locks its h=588 phase to the sampled 52.8 MHz Recycler RF
//    and supplies aligned h=1 (89.8 kHz), h=28 (2.5 MHz) and h=588 phases.
//  * marker_phase_detector measures the digitised bucket-zero (RRAA) marker
//    against the h=1 phase; phase_correction multiplies it by 28 and, when
//    align_req asks (once per machine cycle), latches it as the h=28 offset,
//    so the 2.5 MHz RF is re-aligned to bucket zero every cycle.
//  * rf_drive makes the 2.5 MHz cavity drive DAC word from the h=28 phase.
//  * transfer_sequencer counts RRAA marker turns after an extraction event:
//    extraction sync, drive/AC-dipole disable, Delivery Ring NCO reset,
//    re-enable one turn later, kicker fire at turn 180.
//  * three dr_nco accumulators (2.36 MHz, 4.41 MHz, 294 kHz) are restarted
//    together by that NCO reset with tunable phase offsets that advance per
//    bunch; the 2.36 MHz one drives the Delivery Ring cavity DAC, gated by
//    the sequencer.
//  * marker_gen makes revolution and 2.5 MHz bucket markers from the
//    aligned phases.
// ADCs, DACs, the TTL level-translation board and the control processor
// are outside this module: their samples, words and control registers are
// plain ports. Timing inputs (RRAA TTL marker, extraction event, machine
// cycle reset) are synchronised here (3 clocks). The block split follows
// the paper; the port set and control encoding are this design's choices.
module llrf_top
  import llrf_pkg::*;
(
  input  logic                     clk,            // 50 MHz reference
  input  logic                     rst,            // synchronous reset
  // ADC samples
  input  logic signed [ADC_W-1:0]  adc_rf53,       // sampled 52.8 MHz RF
  input  logic signed [ADC_W-1:0]  adc_marker,     // sampled RRAA marker
  // TTL timing inputs (asynchronous)
  input  logic                     rraa_ttl,       // bucket-zero marker
  input  logic                     extr_event_ttl, // extraction event ($A6)
  input  logic                     cycle_rst_ttl,  // machine cycle reset ($E9)
  // control registers
  input  logic                     align_req,      // latch a new 2.5 MHz offset
  input  logic [PHASE_W-1:0]       nom_inc,        // h=1 nominal increment
  input  logic [4:0]               gain_shift,     // PLL gain adjust (10 = 100 dB)
  input  logic [16:0]              amp_h28,        // 2.5 MHz drive amplitude
  input  logic [16:0]              amp_dr,         // 2.36 MHz drive amplitude
  input  logic [PHASE_W-1:0]       dr_inc      [3],// DR NCO increments
  input  logic [PHASE_W-1:0]       dr_offset   [3],// DR NCO reset phases
  input  logic [PHASE_W-1:0]       dr_adv_step [3],// DR per-bunch advance
  // DAC words
  output logic signed [DAC_W-1:0]  dac_h28,        // 2.5 MHz cavity drive
  output logic signed [DAC_W-1:0]  dac_dr,         // 2.36 MHz cavity drive
  // timing outputs
  output logic                     extr_sync,
  output logic                     rf_enable,
  output logic                     acdipole_enable,
  output logic                     kicker_fire,
  output logic                     dr_nco_reset,
  output logic                     rev_marker,     // h=1 bucket-zero marker
  output logic                     bucket_marker,  // h=28 bucket marker
  // status
  output logic [PHASE_W-1:0]       dr_phase    [3],
  output logic [PHASE_W-1:0]       ph1,
  output logic [PHASE_W-1:0]       ph28,
  output logic [PHASE_W-1:0]       ph588,
  output logic signed [PH_W-1:0]   pll_phase_err,
  output logic signed [PH_W-1:0]   pll_fm,
  output logic signed [PH_W-1:0]   marker_phase,
  output logic [PHASE_W-1:0]       offset28,
  output logic                     aligned,
  output logic                     seq_busy
);
  logic rraa_pulse, extr_pulse, cycle_pulse, mk_valid;

  edge_sync u_sync_rraa  (.clk, .rst, .d(rraa_ttl),       .rise(rraa_pulse));
  edge_sync u_sync_extr  (.clk, .rst, .d(extr_event_ttl), .rise(extr_pulse));
  edge_sync u_sync_cycle (.clk, .rst, .d(cycle_rst_ttl),  .rise(cycle_pulse));

  digital_pll u_pll (
    .clk, .rst, .rf_in(adc_rf53), .nom_inc, .gain_shift, .offset28,
    .ph1, .ph28, .ph588, .phase_err(pll_phase_err), .fm(pll_fm));

  marker_phase_detector u_mpd (
    .clk, .rst, .marker_in(adc_marker), .ph1, .phase_o(marker_phase), .valid_o(mk_valid));

  phase_correction u_pc (
    .clk, .rst, .align_req, .det_phase(marker_phase), .det_valid(mk_valid),
    .offset28, .aligned);

  rf_drive u_drv_h28 (.clk, .rst, .phase(ph28), .amp(amp_h28), .enable(1'b1), .dac(dac_h28));

  transfer_sequencer u_seq (
    .clk, .rst, .marker(rraa_pulse), .extr_event(extr_pulse), .extr_sync,
    .rf_enable, .acdipole_enable, .nco_reset(dr_nco_reset), .kick(kicker_fire),
    .busy(seq_busy));

  for (genvar c = 0; c < 3; c++) begin : g_dr
    dr_nco u_dr (
      .clk, .rst, .inc(dr_inc[c]), .base_offset(dr_offset[c]), .adv_step(dr_adv_step[c]),
      .cycle_reset(cycle_pulse), .nco_reset(dr_nco_reset), .phase(dr_phase[c]));
  end

  rf_drive u_drv_dr (
    .clk, .rst, .phase(dr_phase[0]), .amp(amp_dr), .enable(rf_enable), .dac(dac_dr));

  marker_gen u_mk_rev (.clk, .rst, .phase(ph1),  .marker(rev_marker));
  marker_gen u_mk_bkt (.clk, .rst, .phase(ph28), .marker(bucket_marker));
endmodule
