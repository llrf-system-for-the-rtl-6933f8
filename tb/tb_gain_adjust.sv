// tb_gain_adjust: checks y = x >>> shift (6 dB per step) for every shift
// 0..31, with shifts above 20 clamped to 20, one clock latency.
module tb_gain_adjust;
  logic clk = 0, rst = 1;
  logic signed [21:0] x, y;
  logic [4:0] shift;
  int checks = 0, failures = 0;

  gain_adjust dut (.clk, .rst, .x, .shift, .y);
  always #10 clk = ~clk;

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint e;
    int sh;
    x = '0; shift = '0;
    repeat (2) @(posedge clk);
    #1 rst = 0;
    for (int n = 0; n < 1000; n++) begin
      x = 22'($urandom());
      shift = 5'(n % 32);
      sh = (n % 32 > 20) ? 20 : n % 32;
      e = longint'(x);
      e = e >>> sh;
      @(posedge clk); #1;
      checks++;
      if (longint'(y) != e) begin
        failures++;
        if (failures < 10) $display("x=%0d shift=%0d got %0d exp %0d", x, shift, y, e);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
