// tb_spectrum_buffer -- spectra written in bit-reversed order on one clock
// must be readable in natural bin order on an unrelated clock; only bins
// below NBINS are kept; rdy pulses once per spectrum with the event number
// and mode captured at the start of that spectrum.
//
// Keeping the lower bins follows the published design (5001 of 16384);
// the sizes here are reduced (11 of 32) and the clock-crossing handshake is
// this design's own. A watchdog guards the run.
module tb_spectrum_buffer;
  localparam int L = 5, N = 1 << L, NB = 11;
  logic wclk = 0, rclk = 0, wrst = 1, rrst = 1;
  logic [63:0] wdata = 0, rdata;
  logic wvalid = 0, wstart = 0;
  logic [L-1:0] wpos = 0;
  logic [23:0] wevt = 0, evt;
  logic [1:0] wmode = 0, mode;
  logic re = 0;
  logic [3:0] raddr = 0;
  logic rdy;
  int checks = 0, failures = 0, rdys = 0;

  spectrum_buffer #(.WIDTH(64), .LOG2N(L), .NBINS(NB), .EVT_W(24)) dut (
    .wclk(wclk), .wrst(wrst), .wdata(wdata), .wvalid(wvalid), .wstart(wstart),
    .wpos(wpos), .wevt(wevt), .wmode(wmode), .rclk(rclk), .rrst(rrst), .re(re),
    .raddr(raddr), .rdata(rdata), .rdy(rdy), .evt(evt), .mode(mode));

  always #4.77 wclk = ~wclk;
  always #4 rclk = ~rclk;
  always @(posedge rclk) if (rdy) rdys++;

  function automatic int brev(int p);
    int r = 0;
    for (int i = 0; i < L; i++) if (p & (1 << i)) r |= 1 << (L - 1 - i);
    return r;
  endfunction

  initial begin
    repeat (3) @(posedge wclk);
    wrst = 0; rrst = 0;
    for (int s = 0; s < 3; s++) begin
      for (int p = 0; p < N; p++) begin
        @(negedge wclk);
        wvalid = 1; wstart = (p == 0); wpos = L'(p);
        wevt = (p == 0) ? 24'(100 + s) : 24'(999);     // only the start value counts
        wmode = (p == 0) ? 2'(s) : 2'd3;
        wdata = 64'(s) << 32 | 64'(brev(p));
      end
      @(negedge wclk) wvalid = 0; wstart = 0;
      // wait for rdy on the read clock
      begin
        int w = 0;
        while (!rdy && w < 50) begin @(posedge rclk); #0.1; w++; end
        checks++;
        if (!rdy) begin failures++; $display("no rdy"); end
      end
      checks++;
      if (evt != 24'(100 + s) || mode != 2'(s)) begin failures++; $display("evt %0d mode %0d", evt, mode); end
      for (int b = 0; b < NB; b++) begin
        @(negedge rclk); re = 1; raddr = 4'(b);
        @(negedge rclk); re = 0;
        checks++;
        if (rdata != (64'(s) << 32 | 64'(b))) begin failures++; $display("bin %0d = %h", b, rdata); end
      end
    end
    checks++;
    if (rdys != 3) begin failures++; $display("rdy pulses %0d", rdys); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (100000) @(posedge wclk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
