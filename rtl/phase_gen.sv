// phase_gen -- phase accumulator for the digital local oscillator.
//
// Adds PHASE_INC to a PHASE_W-bit phase every ADC clock; 2^PHASE_W is one
// turn. With the defaults (PHASE_W = 20, PHASE_INC = 104500) the LO frequency
// is 104500/2^20 x 104.8576 MHz = 10.45 MHz exactly, the published LO that
// puts the lower edge of the 500 kHz analysis window at DC. Because
// 104500 x 2^20 is a multiple of 2^20 the phase returns to 0 at every frame
// boundary; it is also forced to 0 at `sync` so that every frame starts with
// the same LO phase. The accumulator itself is this implementation's choice.
//
// Timing: `phase` is registered; phase = 0 in the cycle after sync.
module phase_gen #(
  parameter int unsigned PHASE_W   = 20,
  parameter int unsigned PHASE_INC = 104500
) (
  input  logic               clk,
  input  logic               rst,
  input  logic               sync,
  output logic [PHASE_W-1:0] phase
);
  always_ff @(posedge clk) begin
    if (rst || sync) phase <= '0;
    else             phase <= phase + PHASE_W'(PHASE_INC);
  end
endmodule
