// sync_ff -- two-flip-flop synchroniser for slowly changing configuration
// bits crossing into another clock domain.
//
// Carries the DAQ mode from the 125 MHz configuration registers into the ADC
// clock domain. The mode changes at most a few times per run and is sampled
// once per spectrum, so a plain two-stage synchroniser is enough. The
// published design does not show this crossing; it is this design's own.
//
// Interface: clk, d in, q out. Timing: `q` follows `d` after two clocks.
module sync_ff #(
  parameter int unsigned WIDTH = 2
) (
  input  logic             clk,
  input  logic             rst,
  input  logic [WIDTH-1:0] d,
  output logic [WIDTH-1:0] q
);
  logic [WIDTH-1:0] meta;
  always_ff @(posedge clk) begin
    if (rst) begin
      meta <= '0;
      q    <= '0;
    end else begin
      meta <= d;
      q    <= meta;
    end
  end
endmodule
