// tb_transfer_sequencer: runs two transfers with markers every 20 clocks
// (standing in for the 11.1 us turn) and checks, against marker counts kept
// by the testbench: extraction sync on the first marker after the event,
// disable at turn 1, NCO reset at turn 89, enable at turn 90 (one turn after
// the reset), kicker at turn 180, and that an event during a running
// sequence is ignored.
module tb_transfer_sequencer;
  logic clk = 0, rst = 1;
  logic marker, extr_event;
  logic extr_sync, rf_enable, acdipole_enable, nco_reset, kick, busy;
  int checks = 0, failures = 0;

  transfer_sequencer dut (.clk, .rst, .marker, .extr_event, .extr_sync, .rf_enable,
                          .acdipole_enable, .nco_reset, .kick, .busy);
  always #10 clk = ~clk;

  initial begin
    repeat (30000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic expect_bit(input logic got, input logic exp, input string what, input int turn);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 10) $display("turn %0d: %s = %0d, expected %0d", turn, what, got, exp);
    end
  endtask

  initial begin
    marker = 0; extr_event = 0;
    repeat (2) @(posedge clk);
    #1 rst = 0;
    for (int xfer = 0; xfer < 2; xfer++) begin
      repeat (5) @(posedge clk);
      #1 extr_event = 1; @(posedge clk); #1 extr_event = 0;
      for (int turn = 0; turn <= 182; turn++) begin
        repeat (19) @(posedge clk);
        #1 marker = 1;
        if (turn == 40) extr_event = 1;          // must be ignored
        @(posedge clk); #1 marker = 0; extr_event = 0;
        expect_bit(extr_sync, turn == 0, "extr_sync", turn);
        expect_bit(nco_reset, turn == 89, "nco_reset", turn);
        expect_bit(kick, turn == 180, "kick", turn);
        expect_bit(rf_enable, !(turn >= 1 && turn < 90), "rf_enable", turn);
        expect_bit(acdipole_enable, !(turn >= 1 && turn < 90), "acdipole_enable", turn);
        expect_bit(busy, turn < 180, "busy", turn);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
