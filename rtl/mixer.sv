// mixer -- digital down-conversion multiplier.
//
// Multiplies each offset-free ADC sample by the LO cosine (both signed, LO at
// full scale 2^(LO_W-1)-1) and keeps the product scaled back by 2^(LO_W-1),
// rounded and saturated to OUT_W bits. Mixing 10.45-10.95 MHz with the
// 10.45 MHz LO yields DC-500 kHz plus an image around 21 MHz that the FIR
// removes. The single real multiplication follows the published block
// diagram; widths, rounding and saturation are choices of this
// implementation.
//
// Timing: two register stages (product, then rounding), latency 2.
module mixer #(
  parameter int unsigned IN_W  = 16,
  parameter int unsigned LO_W  = 16,
  parameter int unsigned OUT_W = 16
) (
  input  logic                    clk,
  input  logic signed [IN_W-1:0]  din,
  input  logic signed [LO_W-1:0]  lo,
  output logic signed [OUT_W-1:0] dout
);
  localparam int unsigned P_W = IN_W + LO_W;
  logic signed [P_W-1:0] prod;
  logic signed [P_W-1:0] scaled;
  localparam logic signed [P_W-1:0] MAXV = P_W'((1 << (OUT_W-1)) - 1);
  localparam logic signed [P_W-1:0] MINV = -P_W'(1 << (OUT_W-1));

  always_ff @(posedge clk) prod <= din * lo;

  assign scaled = (prod + P_W'(1 << (LO_W-2))) >>> (LO_W-1);

  always_ff @(posedge clk) begin
    if (scaled > MAXV)      dout <= MAXV[OUT_W-1:0];
    else if (scaled < MINV) dout <= MINV[OUT_W-1:0];
    else                    dout <= scaled[OUT_W-1:0];
  end
endmodule
