// tb_iir_lpf: checks the first-order low-pass against a real-valued model
// of y[n] = y[n-1] + ((x[n]+x[n-1])/2 - y[n-1]) * 2^-K for random input,
// then checks unity DC gain (a step settles to the input) and rejection of
// an input alternating at half the sample rate (the zero at Nyquist).
module tb_iir_lpf;
  localparam int K = 4;
  logic clk = 0, rst = 1;
  logic signed [23:0] x, y;
  int checks = 0, failures = 0;

  iir_lpf #(.W(24), .K(K)) dut (.clk, .rst, .in_valid(1'b1), .x, .y);
  always #10 clk = ~clk;

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real ym, xp, a;
    a = 1.0 / real'(1 << K);
    x = '0; ym = 0.0; xp = 0.0;
    repeat (3) @(posedge clk);
    #1 rst = 0;
    for (int n = 0; n < 400; n++) begin
      x = 24'($signed($urandom()) >>> 12);
      ym = ym + ((real'(x) + xp) / 2.0 - ym) * a;
      xp = real'(x);
      @(posedge clk); #1;
      checks++;
      if (real'(y) - ym > 2.0 || ym - real'(y) > 2.0) begin
        failures++;
        if (failures < 10) $display("n=%0d got %0d exp %f", n, y, ym);
      end
    end
    x = 24'sd100000;
    repeat (400) @(posedge clk);
    #1 checks++;
    if (y < 24'sd99990 || y > 24'sd100001) begin failures++; $display("DC gain: y=%0d", y); end
    for (int n = 0; n < 400; n++) begin
      x = (n % 2 == 0) ? 24'sd500000 : -24'sd500000;
      @(posedge clk); #1;
    end
    #1 checks++;
    if (y > 24'sd2 || y < -24'sd2) begin failures++; $display("Nyquist: y=%0d", y); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
