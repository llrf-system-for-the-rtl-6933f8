// tb_cordic_p2r: checks the polar-to-rectangular CORDIC against real-valued
// cos/sin for random phases and amplitudes, and checks its latency of
// ITER+2 clocks by comparing each output with the input applied exactly
// that many clocks earlier.
module tb_cordic_p2r;
  localparam int OUT_W = 18, ITER = 18, LAT = ITER + 2, N = 400;
  logic clk = 0;
  logic [29:0] phase;
  logic [OUT_W-2:0] amp;
  logic signed [OUT_W-1:0] c, s;
  int checks = 0, failures = 0;
  logic [29:0] ph_h [N+LAT];
  logic [OUT_W-2:0] a_h [N+LAT];

  cordic_p2r #(.PHASE_W(30), .OUT_W(OUT_W), .ITER(ITER)) dut (.clk, .phase, .amp, .cos_o(c), .sin_o(s));

  always #10 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real ang, ec, es;
    int k;
    for (int n = 0; n < N + LAT; n++) begin
      ph_h[n] = 30'($urandom());
      a_h[n]  = (n % 3 == 0) ? {(OUT_W-1){1'b1}} : (OUT_W-1)'($urandom());
      phase = ph_h[n];
      amp   = a_h[n];
      @(posedge clk); #1;
      if (n + 1 - LAT >= 0) begin
        k   = n + 1 - LAT;
        ang = real'(ph_h[k]) / 1073741824.0 * 2.0 * 3.14159265358979;
        ec  = real'(a_h[k]) * $cos(ang);
        es  = real'(a_h[k]) * $sin(ang);
        checks++;
        if ((real'(c) - ec > 12.0) || (ec - real'(c) > 12.0) ||
            (real'(s) - es > 12.0) || (es - real'(s) > 12.0)) begin
          failures++;
          if (failures < 10) $display("mismatch k=%0d ph=%h amp=%0d got %0d,%0d exp %f,%f", k, ph_h[k], a_h[k], c, s, ec, es);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
