// frame_counter -- counts internal sync pulses (one per 10 ms frame).
//
// The count is the event number (EVTID, 24 bit in the packet header) of the
// frame now being recorded; its least significant bit is the ping-pong bank
// select of the sub-sample RAMs (RAM 0 written on even frames, RAM 1 on odd
// frames) and of the multiplexer in front of the FFT. That the event number
// increases by one per 10 ms follows the published design; the use of bit 0
// as bank select and the reset value 0 are choices of this implementation.
//
// Timing: `evt` increments in the cycle after `sync`.
module frame_counter #(
  parameter int unsigned EVT_W = 24
) (
  input  logic             clk,
  input  logic             rst,
  input  logic             sync,
  output logic [EVT_W-1:0] evt,
  output logic             bank
);
  always_ff @(posedge clk) begin
    if (rst)       evt <= '0;
    else if (sync) evt <= evt + 1'b1;
  end
  assign bank = evt[0];
endmodule
