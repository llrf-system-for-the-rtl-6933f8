// tb_digital_pll: closed-loop test of the digital PLL at the paper's gain
// setting (gain_shift 10, loop gain about 1e5). The reference is a 14-bit
// cosine sampled at 50 MHz whose frequency is 52.8 MHz plus 2 kHz (so the
// loop must pull in a frequency offset) and whose starting phase is random.
// Checks, over the last 2 ms of a 6 ms run: fm has settled to the value
// that supplies the 2 kHz offset at h=588 (fm*588*50e6/2^30 = 2 kHz, fm
// about 73); the static phase error of this type-1 loop is the expected
// dw/K = 2pi*2 kHz/1e5 = 0.126 rad (7.2 deg, within 25 %) and equals
// fm*2^10 (the loop filter's unity DC gain and the 10-bit attenuator); the
// NCO phase ph588 keeps a constant offset from the reference (locked);
// and ph28 = 28*ph1 still holds.
module tb_digital_pll;
  localparam real PI = 3.14159265358979;
  logic clk = 0, rst = 1;
  logic signed [13:0] rf_in;
  logic [29:0] ph1, ph28, ph588;
  logic signed [21:0] phase_err, fm;
  int checks = 0, failures = 0;

  digital_pll dut (.clk, .rst, .rf_in, .nom_inc(30'd1928353), .gain_shift(5'd10),
                   .offset28(30'd0), .ph1, .ph28, .ph588, .phase_err, .fm);
  always #10 clk = ~clk;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real th, dth, err_deg, d, d0;
    int max_err;
    dth = 2.0 * PI * (52.8e6 + 2.0e3) / 50.0e6;
    th  = real'($urandom() % 360) * PI / 180.0;
    rf_in = '0;
    repeat (4) @(posedge clk);
    #1 rst = 0;
    for (int n = 0; n < 300000; n++) begin
      rf_in = 14'($rtoi(8000.0 * $cos(th)));
      th = th + dth;
      if (th > 2.0 * PI) th = th - 2.0 * PI;
      @(posedge clk); #1;
      if (n >= 200000 && n % 1000 == 0) begin
        err_deg = real'(phase_err) / 2097152.0 * 180.0;
        checks++;
        if (err_deg > 9.0 || err_deg < 5.4 ||
            phase_err - (22'(fm) <<< 10) > 22'sd2048 || (22'(fm) <<< 10) - phase_err > 22'sd2048) begin
          failures++;
          if (failures < 10) $display("n=%0d phase error %f deg", n, err_deg);
        end
        // NCO phase against the reference phase applied this clock
        // (the reference is delayed by the loop's NCO latency inside).
        d = real'(ph588) / 1073741824.0 * 2.0 * PI - th;
        while (d > PI) d -= 2.0 * PI;
        while (d < -PI) d += 2.0 * PI;
        if (n == 200000) d0 = d;
        d = d - d0;
        checks++;
        if (d > 0.02 || d < -0.02) begin
          failures++;
          if (failures < 10) $display("n=%0d ph588 off reference by %f rad", n, d);
        end
        checks++;
        if (ph28 != 30'(ph1 * 30'd28)) begin failures++; $display("ph28 not aligned to ph1"); end
      end
    end
    checks++;
    if (fm < 22'sd60 || fm > 22'sd86) begin failures++; $display("fm=%0d, expected about 73", fm); end
    $display("fm=%0d phase_err=%0d", fm, phase_err);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
