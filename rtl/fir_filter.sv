// fir_filter -- low-pass FIR that keeps the difference band after mixing.
//
// Transposed direct form: every input sample is multiplied by all NTAPS
// coefficients at once and the products are added into a chain of
// accumulator registers, so one output is produced per ADC clock. The output
// is the accumulator divided by 2^COEF_FRAC (unity DC gain), rounded and
// saturated to OUT_W bits. The coefficients (package daq_pkg) are a 64-tap
// equiripple design with pass band to 3 MHz (< 0.1 dB ripple) and stop band
// from 8 MHz (> 60 dB), which is the published specification; the tap count,
// the quantisation and the transposed structure are choices of this
// implementation.
//
// Timing: one new sample in and one filtered sample out per clock; the output
// register adds one clock, so the impulse response appears at `dout` starting
// two clocks after the impulse enters `din`.
module fir_filter
  import daq_pkg::*;
#(
  parameter int unsigned IN_W      = 16,
  parameter int unsigned OUT_W     = 18,
  parameter int unsigned COEF_FRAC = 17
) (
  input  logic                    clk,
  input  logic                    rst,
  input  logic signed [IN_W-1:0]  din,
  output logic signed [OUT_W-1:0] dout
);
  localparam int unsigned NTAPS = FIR_NTAPS;     // 64
  localparam int unsigned ACC_W = IN_W + COEF_W + 7;
  localparam coef_arr_t TAPS = fir_taps();
  localparam logic signed [ACC_W-1:0] MAXV = ACC_W'((1 << (OUT_W-1)) - 1);
  localparam logic signed [ACC_W-1:0] MINV = -ACC_W'(1 << (OUT_W-1));

  logic signed [ACC_W-1:0] acc [NTAPS];
  logic signed [ACC_W-1:0] scaled;

  // y(n) = sum_k h[k] x(n-k): acc[k] collects the terms h[j] x(n-j+k), j >= k
  always_ff @(posedge clk) begin
    if (rst) begin
      for (int k = 0; k < int'(NTAPS); k++) acc[k] <= '0;
    end else begin
      for (int k = 0; k < int'(NTAPS) - 1; k++)
        acc[k] <= acc[k+1] + ACC_W'(din) * ACC_W'(TAPS[k]);
      acc[NTAPS-1] <= ACC_W'(din) * ACC_W'(TAPS[NTAPS-1]);
    end
  end

  assign scaled = (acc[0] + ACC_W'(1 << (COEF_FRAC-1))) >>> COEF_FRAC;

  always_ff @(posedge clk) begin
    if (rst)                dout <= '0;
    else if (scaled > MAXV) dout <= MAXV[OUT_W-1:0];
    else if (scaled < MINV) dout <= MINV[OUT_W-1:0];
    else                    dout <= scaled[OUT_W-1:0];
  end
endmodule
