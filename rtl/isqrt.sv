// isqrt -- pipelined integer square root, floor(sqrt(x)) of an IN_W-bit
// unsigned number (IN_W even), one result bit per pipeline stage.
//
// Digit-by-digit (restoring) method: each stage brings down the next two
// radicand bits into the partial remainder, tries to subtract (4 r + 1) where
// r is the root found so far, and sets the next root bit if the remainder
// stays non-negative. It is the square-root block of the published spectrum
// path ("voltage" output); the published design does not say how the root is
// computed, so the method is this design's choice.
//
// Interface: x in, root out, no handshake (a pure pipeline).
// Timing: one input per clock, latency IN_W/2 clocks.
module isqrt #(
  parameter int unsigned IN_W = 64
) (
  input  logic              clk,
  input  logic [IN_W-1:0]   x,
  output logic [IN_W/2-1:0] root
);
  localparam int unsigned RW = IN_W / 2;

  logic [IN_W-1:0] xs  [RW+1];
  logic [RW+1:0]   rem [RW+1];
  logic [RW-1:0]   r   [RW+1];

  assign xs[0]  = x;
  assign rem[0] = '0;
  assign r[0]   = '0;

  for (genvar i = 0; i < int'(RW); i++) begin : g_bit
    logic [RW+1:0] trial, cur;
    assign cur   = {rem[i][RW-1:0], xs[i][IN_W-1 -: 2]};
    assign trial = {r[i], 2'b01};
    always_ff @(posedge clk) begin
      xs[i+1] <= xs[i] << 2;
      if (cur >= trial) begin
        rem[i+1] <= cur - trial;
        r[i+1]   <= {r[i][RW-2:0], 1'b1};
      end else begin
        rem[i+1] <= cur;
        r[i+1]   <= {r[i][RW-2:0], 1'b0};
      end
    end
  end

  assign root = r[RW];
endmodule
