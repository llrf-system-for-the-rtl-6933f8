// tb_dr_nco: checks the Delivery Ring NCO: free running by inc, loading
// base_offset + k*337.9 deg on the k-th reset of a machine cycle, and the
// advance cleared by cycle_reset.
module tb_dr_nco;
  logic clk = 0, rst = 1;
  logic [29:0] inc, base, step, phase, p_prev;
  logic cycle_reset, nco_reset;
  int checks = 0, failures = 0;

  dr_nco dut (.clk, .rst, .inc, .base_offset(base), .adv_step(step), .cycle_reset, .nco_reset, .phase);
  always #10 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    inc = 30'd50680614; base = 30'd1000; step = 30'd1007826006;
    cycle_reset = 0; nco_reset = 0;
    repeat (2) @(posedge clk);
    #1 rst = 0;
    for (int cyc = 0; cyc < 3; cyc++) begin
      cycle_reset = 1; @(posedge clk); #1; cycle_reset = 0;
      for (int k = 0; k < 4; k++) begin
        repeat (50) begin
          p_prev = phase; @(posedge clk); #1;
          checks++;
          if (30'(phase - p_prev) != inc) begin failures++; $display("free-run step wrong"); end
        end
        nco_reset = 1; @(posedge clk); #1; nco_reset = 0;
        checks++;
        if (phase != 30'(base + 30'(k) * step)) begin
          failures++;
          $display("cycle %0d bunch %0d: phase %h exp %h", cyc, k, phase, 30'(base + 30'(k) * step));
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
