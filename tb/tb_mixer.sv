// tb_mixer -- test of the down-conversion multiplier.
//
// Random samples and LO values, including full-scale corners, enter one per
// clock; each output, two clocks later, must equal round(din * lo / 2^15)
// saturated to 16 bits, computed here. The single real multiply follows the
// published design; scaling and latency are this design's. A watchdog
// guards the run.
module tb_mixer;
  logic clk = 0;
  logic signed [15:0] din = 0, lo = 0, dout;
  int hd [$], hl [$];
  int checks = 0, failures = 0;
  mixer dut (.clk(clk), .din(din), .lo(lo), .dout(dout));
  always #5 clk = ~clk;
  initial begin
    for (int t = 0; t < 2000; t++) begin
      @(negedge clk);
      if (t == 5) begin din = -16'sd32768; lo = -16'sd32768; end      // saturates
      else begin din = 16'($urandom); lo = 16'($urandom); end
      hd.push_back(int'(din)); hl.push_back(int'(lo));
      if (t >= 2) begin
        longint p; longint e;
        p = longint'(hd[t-2]) * longint'(hl[t-2]);
        e = (p + 16384) >>> 15;
        if (e > 32767) e = 32767;
        if (e < -32768) e = -32768;
        checks++;
        if (longint'(dout) != e) begin failures++; $display("t %0d dout %0d exp %0d", t, dout, e); end
      end
    end
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
