// tb_fir_filter -- test of the 64-tap low-pass FIR.
//
// Checks against references computed here: the taps must be symmetric and
// add up to 2^17 (unity DC gain); an impulse followed by random input must match a direct convolution
// exactly (after the filter's rounding); and in the frequency domain a 1 MHz
// tone must pass with less than 0.1 dB change while a 21 MHz tone (the image
// of the mixer) must be attenuated by more than 60 dB -- the published pass-
// and stop-band requirements. The tap values are this design's own design.
// The convolution is compared at a fixed offset, which also checks the
// latency. A watchdog guards the run.
module tb_fir_filter;
  import daq_pkg::*;
  localparam real PI = 3.141592653589793;
  localparam real FS = 104.8576e6;
  logic clk = 0, rst = 1;
  logic signed [15:0] din = 0;
  logic signed [17:0] dout;
  int x [$];
  int checks = 0, failures = 0;
  coef_arr_t h;
  fir_filter dut (.clk(clk), .rst(rst), .din(din), .dout(dout));
  always #5 clk = ~clk;

  function automatic longint ref_y(int t);
    longint acc = 0;
    for (int k = 0; k < 64; k++)
      if (t - k >= 0) acc += longint'(h[k]) * longint'(x[t - k]);
    acc = (acc + (1 << 16)) >>> 17;
    if (acc > 131071) acc = 131071;
    if (acc < -131072) acc = -131072;
    return acc;
  endfunction

  task automatic tone(real f, output real amp);
    real mx;
    mx = 0;
    for (int t = 0; t < 600; t++) begin
      @(negedge clk);
      din = 16'($rtoi(30000.0 * $sin(2.0 * PI * f * real'(t) / FS)));
      if (t > 200) begin
        real v = (dout < 0) ? -real'(dout) : real'(dout);
        if (v > mx) mx = v;
      end
    end
    amp = mx;
  endtask

  initial begin
    h = fir_taps();
    // the taps themselves: symmetric and summing to 2^17 (unity DC gain)
    begin
      int s = 0;
      for (int k = 0; k < 64; k++) begin
        s += int'(h[k]);
        checks++;
        if (h[k] != h[63 - k]) failures++;
      end
      checks++;
      if (s < 131060 || s > 131080) begin failures++; $display("tap sum %0d", s); end
    end
    repeat (2) @(posedge clk);
    @(negedge clk) rst = 0;
    // impulse of 2^15-1 and random samples
    for (int t = 0; t < 1200; t++) begin
      if (t == 0) din = 16'sd32767;
      else if (t < 100) din = 0;
      else din = 16'($urandom);
      x.push_back(int'(din));
      @(negedge clk);
      if (t >= 1) begin
        checks++;
        if (longint'(dout) != ref_y(t - 1)) begin
          failures++;
          if (failures < 10) $display("t %0d dout %0d exp %0d", t, dout, ref_y(t - 1));
        end
      end
    end
    begin
      real a1, a2;
      tone(1.0e6, a1);
      tone(21.15e6, a2);
      $display("1 MHz gain %f dB, 21.15 MHz gain %f dB", 20.0*$log10(a1/30000.0), 20.0*$log10((a2+0.5)/30000.0));
      checks++;
      if (20.0 * $log10(a1 / 30000.0) < -0.12 || 20.0 * $log10(a1 / 30000.0) > 0.12) failures++;
      checks++;
      if (20.0 * $log10((a2 + 0.5) / 30000.0) > -60.0) failures++;
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
