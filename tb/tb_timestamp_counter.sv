// tb_timestamp_counter -- test of the 10 us timestamp.
//
// With the default divider of 1250 on a 125 MHz clock the count must start at
// 0 after reset and advance by exactly one every 1250 clocks (10 us, the
// published resolution), checked over several steps. A watchdog guards the
// run.
module tb_timestamp_counter;
  logic clk = 0, rst = 1;
  logic [31:0] ts;
  int checks = 0, failures = 0, last_change = -1, cyc = 0;
  logic [31:0] prev;
  timestamp_counter dut (.clk(clk), .rst(rst), .ts(ts));
  always #4 clk = ~clk;
  initial begin
    repeat (2) @(posedge clk);
    @(negedge clk) rst = 0;
    checks++; if (ts != 0) failures++;
    prev = ts;
    for (cyc = 0; cyc < 1250 * 6 + 5; cyc++) begin
      @(negedge clk);
      if (ts != prev) begin
        checks++;
        if (ts != prev + 1) failures++;
        if (last_change >= 0) begin
          checks++;
          if (cyc - last_change != 1250) begin failures++; $display("period %0d", cyc - last_change); end
        end
        last_change = cyc;
        prev = ts;
      end
    end
    checks++;
    if (ts != 6) begin failures++; $display("ts %0d", ts); end
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
