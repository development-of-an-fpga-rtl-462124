// tb_phase_gen -- test of the LO phase accumulator.
//
// With the default parameters the phase n clocks after sync must be
// n * 104500 mod 2^20, i.e. a 10.45 MHz LO at 104.8576 MHz (the published LO
// frequency), over more than 10000 clocks; a sync in the middle must restart
// it at 0 (this design's choice). A watchdog guards the run.
module tb_phase_gen;
  logic clk = 0, rst = 1, sync = 0;
  logic [19:0] phase;
  int checks = 0, failures = 0;
  longint n;
  phase_gen dut (.clk(clk), .rst(rst), .sync(sync), .phase(phase));
  always #5 clk = ~clk;
  initial begin
    repeat (2) @(posedge clk);
    @(negedge clk) rst = 0;
    for (int fr = 0; fr < 3; fr++) begin
      @(negedge clk) sync = 1;
      @(negedge clk) sync = 0;
      n = 0;
      for (int t = 0; t < 3000 + fr * 500; t++) begin
        checks++;
        if (phase != 20'((n * 104500) % (1 << 20))) begin
          failures++; $display("n %0d phase %0d", n, phase);
        end
        n++;
        @(negedge clk);
      end
    end
    // LO frequency: 2^20 steps of 104500 are exactly 104500 turns
    checks++;
    if ((longint'(104500) * (1 << 20)) % (1 << 20) != 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
