// tb_cordic_r2p: checks the rectangular-to-polar CORDIC against a
// real-valued atan2 (22-bit phase, pi = 2^21) and the magnitude times the
// CORDIC gain, for random vectors in all four quadrants, with the output
// taken exactly ITER+2 clocks after the input (the latency).
module tb_cordic_r2p;
  localparam int IN_W = 20, PH_W = 22, ITER = 20, LAT = ITER + 2, N = 400;
  localparam real PI = 3.14159265358979;
  logic clk = 0;
  logic signed [IN_W-1:0] x, y;
  logic signed [PH_W-1:0] ph;
  logic [IN_W+1:0] mag;
  int checks = 0, failures = 0;
  logic signed [IN_W-1:0] x_h [N+LAT], y_h [N+LAT];

  cordic_r2p #(.IN_W(IN_W), .PH_W(PH_W), .ITER(ITER)) dut (.clk, .x_i(x), .y_i(y), .phase_o(ph), .mag_o(mag));

  always #10 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real ea, em, d;
    int k;
    for (int n = 0; n < N + LAT; n++) begin
      x_h[n] = IN_W'($signed($urandom()) >>> (32 - IN_W + 1));
      y_h[n] = IN_W'($signed($urandom()) >>> (32 - IN_W + 1));
      if (n % 50 == 0) begin x_h[n] = -20'sd200000; y_h[n] = 20'sd1; end   // near +-pi
      x = x_h[n]; y = y_h[n];
      @(posedge clk); #1;
      if (n + 1 - LAT >= 0) begin
        k  = n + 1 - LAT;
        ea = $atan2(real'(y_h[k]), real'(x_h[k])) / PI * 2097152.0;
        em = $sqrt(real'(x_h[k]) * real'(x_h[k]) + real'(y_h[k]) * real'(y_h[k])) * 1.6467602;
        d  = real'(ph) - ea;
        if (d > 2097152.0)  d -= 4194304.0;     // compare modulo 2pi
        if (d < -2097152.0) d += 4194304.0;
        checks++;
        if (d > 40.0 || d < -40.0 || real'(mag) - em > 24.0 || em - real'(mag) > 24.0) begin
          failures++;
          if (failures < 10) $display("mismatch k=%0d x=%0d y=%0d ph=%0d exp %f mag=%0d exp %f", k, x_h[k], y_h[k], ph, ea, mag, em);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
