// tb_cordic -- test of the CORDIC sine/cosine generator.
//
// Applies the eight multiples of 45 degrees and then random phases, one per
// clock, and compares cos_o / sin_o, ITER + 2 clocks
// later, with round(32767 cos) and round(32767 sin) computed here in floating
// point; the error may be at most 2 LSB. The published design only says a
// CORDIC generates the LO; the accuracy bound and latency are this design's.
// A watchdog stops the run if it hangs.
module tb_cordic;
  localparam int PW = 20, OW = 16, IT = 16, LAT = IT + 2;
  localparam real PI = 3.141592653589793;
  logic clk = 0;
  logic [PW-1:0] phase = 0;
  logic signed [OW-1:0] c, s;
  logic [PW-1:0] hist [$];
  int checks = 0, failures = 0, maxerr = 0;
  cordic #(.PHASE_W(PW), .OUT_W(OW), .ITER(IT)) dut (.clk(clk), .phase(phase), .cos_o(c), .sin_o(s));
  always #5 clk = ~clk;
  initial begin
    for (int t = 0; t < 3000; t++) begin
      @(negedge clk);
      if (t < 8) phase = PW'(t * (1 << (PW - 3)));      // multiples of 45 degrees
      else       phase = PW'($urandom);
      hist.push_back(phase);
      if (t >= LAT) begin
        real a; int ec, es;
        a  = 2.0 * PI * real'(hist[t - LAT]) / real'(1 << PW);
        ec = int'(c) - int'($floor(32767.0 * $cos(a) + 0.5));
        es = int'(s) - int'($floor(32767.0 * $sin(a) + 0.5));
        if (ec < 0) ec = -ec;
        if (es < 0) es = -es;
        if (ec > maxerr) maxerr = ec;
        if (es > maxerr) maxerr = es;
        checks++;
        if (ec > 2 || es > 2) begin
          failures++;
          if (failures < 10) $display("phase %0d cos %0d sin %0d err %0d %0d", hist[t-LAT], c, s, ec, es);
        end
      end
    end
    $display("max error %0d LSB", maxerr);
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
