// tb_harmonic_nco: checks the three loop accumulators. Every clock:
// ph28 - offset28 = 28*ph1 and ph588 = 588*ph1 (mod 2^30), i.e. the three
// phases stay aligned while fm changes randomly; and ph1 advances by
// nom_inc + fm, applied two clocks after it is presented.
module tb_harmonic_nco;
  logic clk = 0, rst = 1;
  logic [29:0] nom_inc, offset28, ph1, ph28, ph588, ph1_prev;
  logic signed [21:0] fm;
  logic [29:0] inc_h [4];
  int checks = 0, failures = 0;

  harmonic_nco dut (.clk, .rst, .nom_inc, .fm, .offset28, .ph1, .ph28, .ph588);
  always #10 clk = ~clk;

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    nom_inc = 30'd1928353; fm = '0; offset28 = 30'd12345678;
    for (int k = 0; k < 4; k++) inc_h[k] = '0;
    repeat (2) @(posedge clk);
    #1 rst = 0;
    ph1_prev = ph1;
    for (int n = 0; n < 2000; n++) begin
      fm = 22'($urandom());
      if (n % 500 == 0) offset28 = 30'($urandom());
      // increment history: value presented now is used two clocks later
      inc_h[2] = inc_h[1]; inc_h[1] = inc_h[0]; inc_h[0] = nom_inc + 30'(fm);
      @(posedge clk); #1;
      checks++;
      if (30'(ph28 - offset28) != 30'(ph1 * 30'd28) || ph588 != 30'(ph1 * 30'd588)) begin
        failures++;
        if (failures < 10) $display("n=%0d alignment ph1=%h ph28=%h ph588=%h", n, ph1, ph28, ph588);
      end
      if (n >= 2) begin
        checks++;
        if (30'(ph1 - ph1_prev) != inc_h[1]) begin
          failures++;
          if (failures < 10) $display("n=%0d step %h exp %h", n, 30'(ph1 - ph1_prev), inc_h[1]);
        end
      end
      ph1_prev = ph1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
