// tb_clk_div30 -- test of the divide-by-30 system-monitor clock.
//
// Drives the divider from a free-running clock after reset and measures the
// output: every period must be exactly 30 input clocks, 15 high and 15 low.
// The ratio 30 is the published one; the 50 % duty cycle checked here is this
// design's choice. A watchdog guards the run.
module tb_clk_div30;
  logic clk = 0, rst = 1, co;
  int checks = 0, failures = 0, hi = 0, lo = 0, rises = 0;
  logic prev = 0;
  clk_div30 dut (.clk(clk), .rst(rst), .clk_out(co));
  always #1.667 clk = ~clk;
  initial begin
    repeat (2) @(posedge clk);
    @(negedge clk) rst = 0;
    for (int t = 0; t < 30 * 20; t++) begin
      @(negedge clk);
      if (co && !prev) begin
        if (rises > 0) begin
          checks++;
          if (hi != 15 || lo != 15) begin failures++; $display("high %0d low %0d", hi, lo); end
        end
        rises++; hi = 0; lo = 0;
      end
      if (co) hi++; else lo++;
      prev = co;
    end
    checks++;
    if (rises < 19) begin failures++; $display("rises %0d", rises); end
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
