// tb_offset_cancel -- test of the DC offset estimate and subtraction.
//
// Frames of 2^4 samples (reduced from 2^20) with a known mean plus random
// variation are fed between sync pulses. After each frame the offset output
// must equal the floor of the frame mean, and each output sample must be the
// input minus the previous frame's offset, saturated. The averaging method is
// this design's choice; the published design only names an offset
// calculation. A watchdog guards the run.
module tb_offset_cancel;
  localparam int W = 16, L = 4, F = 1 << L;
  logic clk = 0, rst = 1, sync = 0;
  logic signed [W-1:0] din = 0, dout, offset;
  int checks = 0, failures = 0;
  int sum, exp_off;
  int old_off;
  offset_cancel #(.DATA_W(W), .AVG_LOG2(L)) dut (
    .clk(clk), .rst(rst), .sync(sync), .din(din), .dout(dout), .offset(offset));
  always #5 clk = ~clk;
  initial begin
    exp_off = 0; old_off = 0;
    repeat (2) @(posedge clk);
    rst <= 0;
    for (int fr = 0; fr < 6; fr++) begin
      sum = 0;
      for (int i = 0; i < F; i++) begin
        int v;
        v = (fr == 5 && i == 3) ? 32767 : 300 * fr - 500 + $urandom_range(0, 200) - 100;
        @(negedge clk);
        sync = (i == 0);
        din  = W'(v);
        sum += v;
        @(posedge clk); #1;
        // output = this sample minus the offset valid in this cycle
        begin
          int e;
          // the sync sample still sees the previous offset
          e = v - ((i == 0) ? old_off : exp_off);
          if (e > 32767) e = 32767;
          if (e < -32768) e = -32768;
          checks++;
          if (dout != W'(e)) begin failures++; $display("fr %0d i %0d dout %0d exp %0d", fr, i, dout, e); end
        end
        if (i == 0 && fr > 0) begin
          checks++;
          if (offset != W'(exp_off)) begin failures++; $display("offset %0d exp %0d", offset, exp_off); end
        end
      end
      // the next sync latches this frame's mean
      old_off = exp_off;
      exp_off = int'($floor(real'(sum) / real'(F)));
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
