// tb_rf_drive: checks the DAC word against amp*cos(phase) reduced to 14
// bits with the CORDIC latency (ITER+3 = 21 clocks), and that it is 0 one
// clock after enable goes low.
module tb_rf_drive;
  localparam int LAT = 21;
  logic clk = 0, rst = 1, enable;
  logic [29:0] phase;
  logic [16:0] amp;
  logic signed [13:0] dac;
  logic [29:0] ph_h [2000];
  int checks = 0, failures = 0;

  rf_drive dut (.clk, .rst, .phase, .amp, .enable, .dac);
  always #10 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real e;
    amp = 17'd100000; enable = 1; phase = '0;
    repeat (2) @(posedge clk);
    #1 rst = 0;
    for (int n = 0; n < 1000; n++) begin
      ph_h[n] = 30'(n * 50680614);
      phase = ph_h[n];
      enable = !(n >= 600 && n < 700);
      @(posedge clk); #1;
      if (n + 1 - LAT >= 0 && n > 30) begin
        e = 100000.0 * $cos(real'(ph_h[n+1-LAT]) / 1073741824.0 * 6.283185307) / 16.0;
        checks++;
        if (n >= 600 && n < 700) begin
          if (dac != 0) begin failures++; $display("n=%0d drive not off: %0d", n, dac); end
        end else if (real'(dac) - e > 2.0 || e - real'(dac) > 2.0) begin
          failures++;
          if (failures < 10) $display("n=%0d dac=%0d exp %f", n, dac, e);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
