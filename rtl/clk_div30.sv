// clk_div30 -- divides the 300 MHz system clock by 30 (10 MHz) for the
// on-chip system monitor.
//
// A counter runs 0..DIV/2-1 and toggles the output at each wrap, giving a
// 50 % duty-cycle clock at f/DIV. The ratio 30 is the published one; the
// duty cycle and the counter are choices of this implementation. DIV must
// be even.
//
// Timing: `clk_out` is a register; its first rising edge comes DIV/2 clocks
// after reset is released.
module clk_div30 #(
  parameter int unsigned DIV = 30
) (
  input  logic clk,
  input  logic rst,
  output logic clk_out
);
  localparam int unsigned HALF = DIV / 2;
  localparam int unsigned CW   = $clog2(HALF);
  logic [CW-1:0] cnt;

  always_ff @(posedge clk) begin
    if (rst) begin
      cnt     <= '0;
      clk_out <= 1'b0;
    end else if (cnt == CW'(HALF - 1)) begin
      cnt     <= '0;
      clk_out <= ~clk_out;
    end else begin
      cnt     <= cnt + 1'b1;
    end
  end
endmodule
