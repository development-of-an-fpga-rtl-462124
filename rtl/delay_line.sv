// delay_line -- the "Shift Register" between offset subtraction and mixer.
//
// A DEPTH-stage shift register of WIDTH-bit words. It delays the offset-free
// ADC samples by exactly the latency of the LO path (phase generator plus
// CORDIC), so that sample n meets LO sample n in the mixer. Only the block's
// name and place come from the published design; using it for this alignment
// and the depth are choices of this implementation.
//
// Timing: dout(t) = din(t - DEPTH). Reset clears the register chain.
module delay_line #(
  parameter int unsigned WIDTH = 16,
  parameter int unsigned DEPTH = 19
) (
  input  logic             clk,
  input  logic             rst,
  input  logic [WIDTH-1:0] din,
  output logic [WIDTH-1:0] dout
);
  logic [WIDTH-1:0] sr [DEPTH];

  always_ff @(posedge clk) begin
    if (rst) begin
      for (int i = 0; i < int'(DEPTH); i++) sr[i] <= '0;
    end else begin
      sr[0] <= din;
      for (int i = 1; i < int'(DEPTH); i++) sr[i] <= sr[i-1];
    end
  end
  assign dout = sr[DEPTH-1];
endmodule
