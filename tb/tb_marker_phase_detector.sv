// tb_marker_phase_detector: feeds an h=1 phase ramp (89.8 kHz) and a
// digitised bucket-zero marker once per revolution whose centre falls where
// the h=1 phase is theta_m (random per run). The marker is modelled as the
// ADC sees it after the analog front end: a smooth Gaussian pulse about
// 140 ns wide (sigma 3 samples) whose centre lies between samples. The
// measured phase must equal -theta_m to within 0.036 deg of h=1 (1 deg of
// the 2.5 MHz RF after the x28), new values must arrive every 557 clocks,
// and a marker moved by a quarter turn must be followed.
module tb_marker_phase_detector;
  localparam real PI = 3.14159265358979;
  logic clk = 0, rst = 1;
  logic signed [13:0] marker_in;
  logic [29:0] ph1;
  logic signed [21:0] phase_o;
  logic valid_o;
  int checks = 0, failures = 0;

  marker_phase_detector dut (.clk, .rst, .marker_in, .ph1, .phase_o, .valid_o);
  always #10 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Pulse generation: remember the clock index where ph1 crosses theta_m.
  logic [29:0] theta_m;
  int last_valid, nvalid;
  initial begin
    real e, d, trel;
    logic signed [29:0] dphi;
    int since;
    theta_m = 30'($urandom());
    ph1 = '0; marker_in = '0; since = 100; last_valid = -1; nvalid = 0;
    repeat (3) @(posedge clk);
    #1 rst = 0;
    for (int n = 0; n < 60000; n++) begin
      logic [29:0] nxt;
      if (n == 30000) theta_m = theta_m + 30'h1000_0000;   // quarter turn
      nxt = ph1 + 30'd1928353;
      // time of this sample from the pulse centre, in samples
      dphi = ph1 - theta_m;
      trel = real'(dphi) / 1928353.0;
      marker_in = 14'($rtoi(8000.0 * $exp(-trel * trel / 18.0)));
      @(posedge clk); #1;
      ph1 = nxt;
      if (valid_o) begin
        if (last_valid >= 0) begin
          checks++;
          if (n - last_valid != 557) begin failures++; $display("valid spacing %0d", n - last_valid); end
        end
        last_valid = n;
        nvalid++;
        if ((n > 12000 && n < 30000) || n > 42000) begin
          e = -real'(theta_m) / 1073741824.0 * 4194304.0;
          d = real'(phase_o) - e;
          while (d > 2097152.0) d -= 4194304.0;
          while (d < -2097152.0) d += 4194304.0;
          checks++;
          if (d > 418.0 || d < -418.0) begin
            failures++;
            if (failures < 10) $display("n=%0d phase %0d expected %f (diff %f)", n, phase_o, e, d);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
