// tb_marker_gen: drives an h=1-like phase ramp and checks that exactly one
// 7-clock marker pulse starts one clock after each wrap of the phase.
module tb_marker_gen;
  logic clk = 0, rst = 1;
  logic [29:0] phase;
  logic marker;
  int checks = 0, failures = 0;

  marker_gen dut (.clk, .rst, .phase, .marker);
  always #10 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int since_wrap, wraps, width, pulses;
    logic exp_m;
    phase = 30'd100; since_wrap = 1000; wraps = 0; pulses = 0; width = 0;
    repeat (2) @(posedge clk);
    #1 rst = 0;
    for (int n = 0; n < 5000; n++) begin
      logic [29:0] nxt;
      nxt = phase + 30'd1928353 * 4;        // about 139 clocks per turn
      if (nxt < phase) begin since_wrap = 0; wraps++; end else since_wrap++;
      phase = nxt;
      @(posedge clk); #1;
      exp_m = (since_wrap < 7);
      checks++;
      if (marker != exp_m) begin
        failures++;
        if (failures < 10) $display("n=%0d marker=%0d exp %0d", n, marker, exp_m);
      end
      if (marker) width++;
    end
    checks++;
    if (width != 7 * wraps) begin failures++; $display("total width %0d for %0d wraps", width, wraps); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
