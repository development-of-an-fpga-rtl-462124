// tb_sync_gen -- test of the frame counter and internal sync pulse.
//
// With a 4-bit counter (reduced from the published 20 bits) the index must
// count 0..15 and wrap, and sync must be high exactly when the index is 0,
// every 16 clocks; six pulses are expected in 100 clocks. A watchdog guards
// the run.
module tb_sync_gen;
  localparam int W = 4;
  logic clk = 0, rst = 1;
  logic [W-1:0] idx;
  logic sync;
  int checks = 0, failures = 0, syncs = 0, last_sync = -1;
  sync_gen #(.CNT_W(W)) dut (.clk(clk), .rst(rst), .idx(idx), .sync(sync));
  always #5 clk = ~clk;
  initial begin
    repeat (3) @(posedge clk);
    rst <= 0;
    for (int t = 0; t < 100; t++) begin
      @(posedge clk); #1;
      checks++;
      if (idx != W'(t + 1)) begin failures++; $display("idx %0d at t %0d", idx, t); end
      checks++;
      if (sync != (idx == 0)) failures++;
      if (sync) begin
        if (last_sync >= 0) begin
          checks++;
          if (t - last_sync != (1 << W)) begin failures++; $display("sync period %0d", t - last_sync); end
        end
        last_sync = t; syncs++;
      end
    end
    checks++; if (syncs != 6) begin failures++; $display("syncs %0d", syncs); end
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
