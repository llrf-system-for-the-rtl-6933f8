// tb_downconverter: checks I = x*cos >> 12 and Q = -(x*sin) >> 12 on random
// signed inputs with a latency of one clock.
module tb_downconverter;
  localparam int N = 500;
  logic clk = 0;
  logic signed [13:0] x;
  logic signed [17:0] lc, ls;
  logic signed [19:0] i_o, q_o;
  int checks = 0, failures = 0;

  downconverter #(.IN_W(14), .LO_W(18), .OUT_W(20), .SHIFT(12)) dut (.clk, .x, .lo_cos(lc), .lo_sin(ls), .i_o, .q_o);
  always #10 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint xi, ci, si, ei, eq;
    for (int n = 0; n < N; n++) begin
      x = 14'($urandom()); lc = 18'($urandom()); ls = 18'($urandom());
      xi = x; ci = lc; si = ls;
      ei = (xi * ci) >>> 12;
      eq = (-(xi * si)) >>> 12;
      @(posedge clk); #1;
      checks++;
      if (longint'(i_o) != ei || longint'(q_o) != eq) begin
        failures++;
        if (failures < 10) $display("mismatch x=%0d c=%0d s=%0d got %0d %0d exp %0d %0d", xi, ci, si, i_o, q_o, ei, eq);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
