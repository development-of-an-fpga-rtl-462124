// spectrum_buffer -- bin reordering and clock-domain crossing between the
// FFT (ADC clock) and the Ethernet MAC (125 MHz GT clock).
//
// The FFT delivers bins in bit-reversed order. Each word is written into a
// dual-clock RAM at address bitrev(position), i.e. at its true bin number,
// but only if that bin is below NBINS (the lower 5001 bins, DC-500 kHz above
// the LO, are kept; the rest is dropped). When the last word of a spectrum
// has passed, the event number and DAQ mode captured at the start of the
// spectrum are held and a toggle flag is flipped. The toggle is
// synchronised into the MAC clock by two flip-flops; its change raises
// `rdy` for one MAC clock, and the held event number and mode are stable by
// then. The MAC reads the RAM in natural bin order. Keeping only the lower
// 5001 bins follows the published design; the reorder RAM and the toggle
// handshake are this implementation's way of crossing the clock boundary
// drawn in the block diagram. A single buffer suffices because a spectrum
// arrives only every 10 ms, while sending it takes about 0.35 ms.
//
// Timing: `rdy` 3-4 MAC clocks after the last write; `rdata` one MAC clock
// after `raddr`.
module spectrum_buffer #(
  parameter int unsigned WIDTH = 64,
  parameter int unsigned LOG2N = 14,
  parameter int unsigned NBINS = 5001,
  parameter int unsigned EVT_W = 24,
  parameter int unsigned AW    = $clog2(NBINS)
) (
  // FFT side (ADC clock)
  input  logic             wclk,
  input  logic             wrst,
  input  logic [WIDTH-1:0] wdata,
  input  logic             wvalid,
  input  logic             wstart,
  input  logic [LOG2N-1:0] wpos,
  input  logic [EVT_W-1:0] wevt,
  input  logic [1:0]       wmode,
  // MAC side (GT clock)
  input  logic             rclk,
  input  logic             rrst,
  input  logic             re,
  input  logic [AW-1:0]    raddr,
  output logic [WIDTH-1:0] rdata,
  output logic             rdy,
  output logic [EVT_W-1:0] evt,
  output logic [1:0]       mode
);
  logic [LOG2N-1:0] bin;
  logic             we;
  logic             tog_w;
  logic [EVT_W-1:0] evt_cap;
  logic [1:0]       mode_cap;
  logic [2:0]       tog_r;

  always_comb begin
    for (int i = 0; i < int'(LOG2N); i++) bin[i] = wpos[LOG2N-1-i];
  end
  assign we = wvalid && (bin < LOG2N'(NBINS));

  dp_ram #(.WIDTH(WIDTH), .DEPTH(NBINS), .AW(AW)) u_ram (
    .wclk(wclk), .we(we), .waddr(AW'(bin)), .wdata(wdata),
    .rclk(rclk), .re(re), .raddr(raddr), .rdata(rdata));

  always_ff @(posedge wclk) begin
    if (wrst) begin
      tog_w    <= 1'b0;
      evt_cap  <= '0;
      mode_cap <= '0;
      evt      <= '0;
      mode     <= '0;
    end else begin
      if (wstart) begin
        evt_cap  <= wevt;
        mode_cap <= wmode;
      end
      if (wvalid && wpos == '1) begin
        tog_w <= ~tog_w;
        evt   <= evt_cap;
        mode  <= mode_cap;
      end
    end
  end

  always_ff @(posedge rclk) begin
    if (rrst) tog_r <= '0;
    else      tog_r <= {tog_r[1:0], tog_w};
  end
  assign rdy = tog_r[2] ^ tog_r[1];
endmodule
