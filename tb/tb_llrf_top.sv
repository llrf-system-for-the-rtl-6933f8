// tb_llrf_top: end-to-end test of the LLRF top level with every parameter at
// its default.
//
// Stimulus, all at the 50 MHz clock:
//  * the 52.8 MHz Recycler RF as a 14-bit sampled cosine whose phase against
//    the revolution is random (bucket zero can sit at any of the 588 RF
//    buckets; here the RF phase offset is random);
//  * the bucket-zero (RRAA) marker once per revolution, both as a smooth
//    sampled pulse (marker ADC) and as a TTL pulse;
//  * a machine-cycle reset, an alignment request, and two extraction events.
// Checks and mechanism counts:
//  * PLL lock: the phase error stays within +-1 deg once settled;
//  * 2.5 MHz alignment: after the offset is latched, the h=28 phase at every
//    marker centre is zero within 2 deg (the paper reports < 1 ns, about
//    1 deg);
//  * transfer sequence: extraction sync, drive/AC-dipole disable, DR NCO
//    reset, re-enable one turn after the reset and kicker fire happen at the
//    marker counts 0, 1, 89, 90, 180; the DR drive DAC is 0 while disabled;
//  * DR NCO: on the first reset of the cycle the 2.36 MHz phase restarts at
//    its base offset, on the second at base + 337.9 deg (the per-bunch
//    advance).
// Each mechanism must occur at least once.
module tb_llrf_top;
  import llrf_pkg::*;
  localparam real PI = 3.14159265358979;
  localparam real REV_STEP = 1928353.0 / 1073741824.0;   // turns per clock
  localparam int  NCLK = 420000;

  logic clk = 0, rst = 1;
  logic signed [13:0] adc_rf53, adc_marker;
  logic rraa_ttl = 0, extr_event_ttl = 0, cycle_rst_ttl = 0, align_req = 0;
  logic [29:0] dr_inc [3], dr_offset [3], dr_adv_step [3];
  logic signed [13:0] dac_h28, dac_dr;
  logic extr_sync, rf_enable, acdipole_enable, kicker_fire, dr_nco_reset;
  logic rev_marker, bucket_marker, aligned, seq_busy;
  logic [29:0] dr_phase [3], ph1, ph28, ph588, offset28;
  logic signed [21:0] pll_phase_err, pll_fm, marker_phase;

  llrf_top dut (
    .clk, .rst, .adc_rf53, .adc_marker, .rraa_ttl, .extr_event_ttl, .cycle_rst_ttl,
    .align_req, .nom_inc(NOM_INC_H1), .gain_shift(5'd10), .amp_h28(17'd100000),
    .amp_dr(17'd100000), .dr_inc, .dr_offset, .dr_adv_step, .dac_h28, .dac_dr,
    .extr_sync, .rf_enable, .acdipole_enable, .kicker_fire, .dr_nco_reset,
    .rev_marker, .bucket_marker, .dr_phase, .ph1, .ph28, .ph588, .pll_phase_err,
    .pll_fm, .marker_phase, .offset28, .aligned, .seq_busy);

  always #10 clk = ~clk;

  int checks = 0, failures = 0;
  initial begin
    repeat (NCLK + 50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic fail(input string msg);
    failures++;
    if (failures < 15) $display("FAIL @%0t: %s", $time, msg);
  endtask

  // Mechanism counters.
  int n_lock = 0, n_aligned_ok = 0, n_extr = 0, n_disable = 0, n_reset = 0;
  int n_enable = 0, n_kick = 0, n_base_load = 0, n_advance = 0, n_drive_off = 0;

  initial begin
    real rev, phi0, theta_m, trel, d, e;
    int turn, n_dr_reset;
    logic rf_en_d, pending_reset_check;
    dr_inc      = '{INC_DR_2M36, INC_DR_4M41, INC_DR_294K};
    dr_offset   = '{30'd5000000, 30'd0, 30'd0};
    dr_adv_step = '{DR_ADV_337_9, 30'd0, 30'd0};
    rev = 0.0; phi0 = real'($urandom() % 1000) / 1000.0; theta_m = 0.3;
    adc_rf53 = '0; adc_marker = '0;
    turn = -1; n_dr_reset = 0; rf_en_d = 1; pending_reset_check = 0;
    repeat (4) @(posedge clk);
    #1 rst = 0;
    for (int n = 0; n < NCLK; n++) begin
      // Stimulus for this clock.
      d = rev - theta_m;
      d = d - $floor(d + 0.5);                 // wrapped to [-0.5, 0.5) turns
      trel = d / REV_STEP;                     // samples from the marker centre
      adc_rf53   = 14'($rtoi(8000.0 * $cos(2.0 * PI * (588.0 * rev + phi0))));
      adc_marker = 14'($rtoi(8000.0 * $exp(-trel * trel / 18.0)));
      rraa_ttl   = (trel > -3.5 && trel < 3.5);
      cycle_rst_ttl  = (n >= 200000 && n < 200010);
      align_req      = (n == 150000);
      extr_event_ttl = (n >= 205000 && n < 205010) || (n >= 310000 && n < 310010);
      @(posedge clk); #1;
      rev = rev + REV_STEP;
      rev = rev - $floor(rev);

      // PLL lock.
      if (n >= 120000 && n % 500 == 0) begin
        e = real'(pll_phase_err) / 2097152.0 * 180.0;
        checks++;
        if (e > 1.0 || e < -1.0) fail($sformatf("PLL phase error %f deg", e));
        else n_lock++;
      end

      // 2.5 MHz phase at the marker centre (interpolated to the centre).
      // The sample applied before this edge belongs to the clock whose
      // phases were visible then, one phase step behind what is read now.
      if (aligned && n > 160000 && trel >= -0.5 && trel < 0.5) begin
        e = real'(ph28) / 1073741824.0 - (trel + 1.0) * 28.0 * REV_STEP;
        e = (e - $floor(e + 0.5)) * 360.0;
        checks++;
        if (e > 2.0 || e < -2.0) fail($sformatf("h=28 phase at bucket zero %f deg", e));
        else n_aligned_ok++;
      end

      // Transfer sequence, counted on the internally synchronised marker:
      // the synchroniser delays the TTL marker by 3 clocks.
      if (extr_sync) begin n_extr++; turn = 0; end
      else if (seq_busy && rraa_ttl && trel >= 2.5 && trel < 3.5) turn++;
      if (rf_en_d && !rf_enable) begin
        n_disable++; checks++;
        if (turn != 1) fail($sformatf("disable at turn %0d", turn));
      end
      if (!rf_en_d && rf_enable) begin
        n_enable++; checks++;
        if (turn != 90) fail($sformatf("enable at turn %0d", turn));
      end
      if (kicker_fire) begin
        n_kick++; checks++;
        if (turn != 180) fail($sformatf("kick at turn %0d", turn));
      end
      if (pending_reset_check) begin
        pending_reset_check = 0;
        checks++;
        if (dr_phase[0] != 30'(30'd5000000 + 30'(n_dr_reset - 1) * DR_ADV_337_9))
          fail($sformatf("DR phase after reset %0d: %h", n_dr_reset, dr_phase[0]));
        else if (n_dr_reset == 1) n_base_load++;
        else n_advance++;
      end
      if (dr_nco_reset) begin
        n_reset++; n_dr_reset++; checks++;
        if (turn != 89) fail($sformatf("NCO reset at turn %0d", turn));
        pending_reset_check = 1;
      end
      if (!rf_enable && !rf_en_d) begin
        checks++;
        if (dac_dr != 0) fail("DR drive not off while disabled");
        else n_drive_off++;
      end
      rf_en_d = rf_enable;
    end

    $display("mechanisms: lock=%0d aligned_markers=%0d extr=%0d disable=%0d nco_reset=%0d enable=%0d kick=%0d base_load=%0d advance=%0d drive_off=%0d",
             n_lock, n_aligned_ok, n_extr, n_disable, n_reset, n_enable, n_kick, n_base_load, n_advance, n_drive_off);
    checks++; if (n_lock == 0)       fail("PLL lock never observed");
    checks++; if (n_aligned_ok < 10) fail("2.5 MHz alignment never observed");
    checks++; if (n_extr != 2)       fail("expected two extraction syncs");
    checks++; if (n_disable != 2)    fail("expected two drive disables");
    checks++; if (n_reset != 2)      fail("expected two DR NCO resets");
    checks++; if (n_enable != 2)     fail("expected two drive enables");
    checks++; if (n_kick != 2)       fail("expected two kicker fires");
    checks++; if (n_base_load != 1)  fail("DR NCO base offset load not observed");
    checks++; if (n_advance != 1)    fail("DR per-bunch advance not observed");
    checks++; if (n_drive_off == 0)  fail("DR drive off never observed");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
