// tb_frame_counter -- test of the event counter / bank select.
//
// Sync pulses are given at random intervals; after each, the event number
// must have risen by one (the published EVTID rule: one per 10 ms frame) and
// the bank bit must equal its least significant bit (this design's choice of
// bank select). Reset must clear both. A watchdog stops the run if it hangs.
module tb_frame_counter;
  logic clk = 0, rst = 1, sync = 0;
  logic [23:0] evt;
  logic bank;
  int checks = 0, failures = 0, expect_evt = 0;
  frame_counter #(.EVT_W(24)) dut (.clk(clk), .rst(rst), .sync(sync), .evt(evt), .bank(bank));
  always #5 clk = ~clk;
  initial begin
    repeat (2) @(posedge clk);
    rst <= 0;
    for (int t = 0; t < 500; t++) begin
      @(posedge clk);
      sync <= ($urandom_range(0, 3) == 0);
      #1;
      checks++;
      if (evt != 24'(expect_evt) || bank != expect_evt[0]) begin
        failures++; $display("evt %0d expected %0d", evt, expect_evt);
      end
      if (sync) expect_evt++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
