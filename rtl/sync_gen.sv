// sync_gen -- ADC-clock binary counter and internal sync signal.
//
// A free-running CNT_W-bit counter on the ADC clock. When it wraps from
// 2^CNT_W-1 to 0 a one-cycle `sync` pulse is raised, so with the default
// CNT_W = 20 and the 104.8576 MHz ADC clock the pulse comes every 10 ms,
// exactly one acquisition frame (2^20 samples = 100 Hz bin width). The pulse
// and the count (`idx`, the sample index inside the frame) time every later
// stage: LO phase, 1/64 sub-sampling, RAM bank swap and FFT start.
// The 2^20 period follows the published design; the first pulse one cycle
// after reset (so that the chain starts framed) is this implementation's
// choice.
//
// Timing: `idx` counts 0,1,2,...; `sync` is high in the cycle where idx == 0.
module sync_gen #(
  parameter int unsigned CNT_W = 20
) (
  input  logic             clk,
  input  logic             rst,
  output logic [CNT_W-1:0] idx,
  output logic             sync
);
  always_ff @(posedge clk) begin
    if (rst) idx <= '0;
    else     idx <= idx + 1'b1;
  end

  assign sync = (idx == '0) && !rst;
endmodule
