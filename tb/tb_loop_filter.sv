// tb_loop_filter: checks the lag-lead loop filter against a real-valued
// model of y[n] = A1 y[n-1] + G x[n] - GA2 x[n-1] (matched-z form of
// (1+s/w2)/(1+s/w1), w1 = 2pi*500, w2 = 2pi*738, Ts = 20 ns): the first
// output of a step equals G/2^30 * step (0.6775, the high-frequency gain
// w1/w2), the output then rises toward the unity DC gain with the 500 Hz
// pole, and random input is tracked within a few LSB.
module tb_loop_filter;
  localparam real A1 = 1073674361.0 / 1073741824.0;
  localparam real G  = 727478239.0 / 1073741824.0;
  localparam real GA2 = 727410776.0 / 1073741824.0;
  logic clk = 0, rst = 1;
  logic signed [21:0] x, y;
  int checks = 0, failures = 0;

  loop_filter dut (.clk, .rst, .x, .y);
  always #10 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input real ym, input real tol, input string what);
    checks++;
    if (real'(y) - ym > tol || ym - real'(y) > tol) begin
      failures++;
      if (failures < 10) $display("%s: got %0d exp %f", what, y, ym);
    end
  endtask

  initial begin
    real ym, xp;
    x = '0; ym = 0.0; xp = 0.0;
    repeat (3) @(posedge clk);
    #1 rst = 0;
    // Step of 100000: model follows every clock.
    for (int n = 0; n < 30000; n++) begin
      x = 22'sd100000;
      ym = A1 * ym + G * real'(x) - GA2 * xp;
      xp = real'(x);
      @(posedge clk); #1;
      if (n == 0) check(67750.0, 2.0, "first step output (w1/w2)");
      if (n % 100 == 0) check(ym, 3.0, "step response");
    end
    // After 30000 clocks (0.6 ms, 1.9 time constants of 318 us) the
    // output has risen most of the way from 67750 to 100000.
    checks++;
    if (y < 22'sd93000 || y > 22'sd97000) begin failures++; $display("step at 0.6 ms: %0d", y); end
    // Random input.
    for (int n = 0; n < 2000; n++) begin
      x = 22'($signed($urandom()) >>> 12);
      ym = A1 * ym + G * real'(x) - GA2 * xp;
      xp = real'(x);
      @(posedge clk); #1;
      check(ym, 3.0, "random");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
