// tb_phase_correction: checks that after align_req the next valid marker
// phase is latched as offset28 = 28 * phase * 2^8 (mod 2^30), that later
// measurements do not change it until the next request, and 'aligned'.
module tb_phase_correction;
  logic clk = 0, rst = 1;
  logic align_req, det_valid, aligned;
  logic signed [21:0] det_phase;
  logic [29:0] offset28;
  int checks = 0, failures = 0;

  phase_correction dut (.clk, .rst, .align_req, .det_phase, .det_valid, .offset28, .aligned);
  always #10 clk = ~clk;

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [29:0] exp_ofs;
    align_req = 0; det_valid = 0; det_phase = '0;
    repeat (2) @(posedge clk);
    #1 rst = 0;
    for (int r = 0; r < 50; r++) begin
      align_req = 1; @(posedge clk); #1; align_req = 0;
      checks++;
      if (aligned) begin failures++; $display("aligned not cleared by request"); end
      repeat (3) @(posedge clk); #1;
      det_phase = 22'($urandom());
      exp_ofs   = 30'(longint'(det_phase) * 28 * 256);
      det_valid = 1; @(posedge clk); #1; det_valid = 0;
      checks++;
      if (offset28 != exp_ofs || !aligned) begin
        failures++;
        if (failures < 10) $display("r=%0d phase=%0d got %h exp %h", r, det_phase, offset28, exp_ofs);
      end
      // A later measurement without a request must not change the offset.
      det_phase = 22'($urandom()); det_valid = 1; @(posedge clk); #1; det_valid = 0;
      checks++;
      if (offset28 != exp_ofs) begin failures++; $display("offset changed without request"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
