// tb_cic_filter: checks the CIC against a direct moving-sum model.
// Part 1: the PLL's non-decimating length-9 filter, one output per clock
// equal to the sum of the last 9 inputs. Part 2: a decimating 2-stage
// filter with R=5, whose outputs (one per 5 inputs) must equal the
// triangular-weighted sum of the last 9 inputs; the output count is checked.
module tb_cic_filter;
  logic clk = 0, rst = 1;
  logic signed [19:0] x;
  logic v1, v2;
  logic signed [23:0] y1;
  logic signed [25:0] y2;
  int checks = 0, failures = 0;
  longint hist [$];

  cic_filter #(.IN_W(20), .STAGES(1), .M(9), .R(1)) dut1 (.clk, .rst, .in_valid(1'b1), .x, .out_valid(v1), .y(y1));
  cic_filter #(.IN_W(20), .STAGES(2), .M(1), .R(5)) dut2 (.clk, .rst, .in_valid(1'b1), .x, .out_valid(v2), .y(y2));
  always #10 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int nout;
    longint e1, e2, xs;
    nout = 0;
    x = '0;
    repeat (3) @(posedge clk);
    #1 rst = 0;
    for (int n = 0; n < 600; n++) begin
      x = 20'($signed($urandom()) >>> 13);
      xs = x;
      hist.push_back(xs);
      @(posedge clk); #1;
      e1 = 0;
      for (int k = 0; k < 9 && k < hist.size(); k++) e1 += hist[hist.size()-1-k];
      checks++;
      if (!v1 || longint'(y1) != e1) begin
        failures++;
        if (failures < 10) $display("cic9 n=%0d got %0d exp %0d", n, y1, e1);
      end
      if (v2) begin
        nout++;
        e2 = 0;
        for (int k = 0; k < 9 && k < hist.size(); k++)
          e2 += hist[hist.size()-1-k] * ((k < 5) ? (k + 1) : (9 - k));
        checks++;
        if (longint'(y2) != e2) begin
          failures++;
          if (failures < 10) $display("cic dec n=%0d got %0d exp %0d", n, y2, e2);
        end
      end
    end
    checks++;
    if (nout != 120) begin failures++; $display("decimated output count %0d, expected 120", nout); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
