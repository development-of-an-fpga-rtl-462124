// dp_ram -- simple dual-port RAM: one write port, one registered read port,
// each with its own clock (they may be the same clock).
//
// Written as an array so that synthesis maps it to block RAM. A read of the
// address being written in the same cycle returns the old word. The DAQ uses
// it for the two ping-pong sub-sample RAMs (the published "dual-port RAM"
// blocks, 16384 x 18 bit here) and for the spectrum buffer that crosses from
// the ADC clock to the Ethernet clock; the word widths are this design's.
//
// Interface: write port (wclk, we, waddr, wdata), read port (rclk, re,
// raddr, rdata). Timing: `rdata` holds mem[raddr] one `rclk` cycle after
// `re` and `raddr`.
module dp_ram #(
  parameter int unsigned WIDTH = 18,
  parameter int unsigned DEPTH = 16384,
  parameter int unsigned AW    = $clog2(DEPTH)
) (
  input  logic             wclk,
  input  logic             we,
  input  logic [AW-1:0]    waddr,
  input  logic [WIDTH-1:0] wdata,
  input  logic             rclk,
  input  logic             re,
  input  logic [AW-1:0]    raddr,
  output logic [WIDTH-1:0] rdata
);
  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge wclk) begin
    if (we) mem[waddr] <= wdata;
  end

  always_ff @(posedge rclk) begin
    if (re) rdata <= mem[raddr];
  end
endmodule
