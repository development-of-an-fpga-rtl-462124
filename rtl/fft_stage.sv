// fft_stage -- one radix-2 decimation-in-frequency stage of a single-path
// delay-feedback (R2SDF) pipelined FFT.
//
// The stage sees its input in blocks of 2*SPAN samples. During the first
// half of a block the incoming samples x[n] go into a SPAN-deep feedback
// memory, while the memory's previous content (the differences of the last
// block) leaves multiplied by the twiddle factor W = exp(-j 2 pi n / (2 SPAN)).
// During the second half the incoming x[n+SPAN] meets x[n] from the memory:
// the sum leaves at once and the difference goes back into the memory. The
// data word grows by one bit per stage, so no scaling is needed and nothing
// overflows. Twiddles are Q2.16 (TW_W bits, 1.0 = 2^TW_FRAC), computed at
// elaboration time, products are rounded to nearest.
//
// Interface: one complex sample per clock on in_re/in_im; `in_start` marks
// sample 0 of a transform; the stage keeps clocking so that zeros fed after
// the last sample flush it. Timing: out_start follows in_start by SPAN + 1
// clocks; out_re/out_im are registered.
module fft_stage #(
  parameter int unsigned IN_W    = 18,
  parameter int unsigned SPAN    = 8192,
  parameter int unsigned TW_W    = 18,
  parameter int unsigned TW_FRAC = 16
) (
  input  logic                   clk,
  input  logic                   rst,
  input  logic signed [IN_W-1:0] in_re,
  input  logic signed [IN_W-1:0] in_im,
  input  logic                   in_start,
  output logic signed [IN_W:0]   out_re,
  output logic signed [IN_W:0]   out_im,
  output logic                   out_start
);
  localparam int unsigned OW    = IN_W + 1;
  localparam int unsigned SL    = (SPAN > 1) ? $clog2(SPAN) : 0;
  localparam int unsigned PW    = (SPAN > 1) ? SL : 1;
  localparam int unsigned PRODW = OW + TW_W;

  typedef logic signed [TW_W-1:0] tw_t;

  // twiddle W^n = exp(-j 2 pi n / (2 SPAN)), rounded to TW_FRAC fraction bits
  function automatic tw_t tw_val(input int n, input bit imag);
    real a;
    a = 2.0 * 3.141592653589793 * real'(n) / real'(2 * SPAN);
    if (imag) return tw_t'($rtoi($floor(-$sin(a) * real'(1 << TW_FRAC) + 0.5)));
    else      return tw_t'($rtoi($floor( $cos(a) * real'(1 << TW_FRAC) + 0.5)));
  endfunction

  // constant twiddle tables, one elaboration-time constant per entry
  tw_t TW_RE [SPAN];
  tw_t TW_IM [SPAN];
  for (genvar n = 0; n < int'(SPAN); n++) begin : g_tw
    localparam tw_t WR = tw_val(n, 1'b0);
    localparam tw_t WI = tw_val(n, 1'b1);
    assign TW_RE[n] = WR;
    assign TW_IM[n] = WI;
  end

  logic [SL:0]              cnt, cur;
  logic [PW-1:0]            ptr;
  logic                     half;
  logic signed [OW-1:0]     mem_re [SPAN];
  logic signed [OW-1:0]     mem_im [SPAN];
  logic signed [OW-1:0]     f_re, f_im, x_re, x_im;
  logic signed [PRODW-1:0]  p_re, p_im;
  logic signed [OW-1:0]     y_re, y_im, w_re_in, w_im_in;
  logic                     pend;

  assign cur  = in_start ? '0 : cnt;
  assign half = cur[SL];
  if (SPAN > 1) begin : g_ptr
    assign ptr = cur[PW-1:0];
  end else begin : g_ptr1
    assign ptr = '0;
  end

  assign x_re = OW'(in_re);
  assign x_im = OW'(in_im);
  assign f_re = mem_re[ptr];
  assign f_im = mem_im[ptr];

  // twiddle multiply of the stored difference (first half of a block)
  assign p_re = PRODW'(f_re) * PRODW'(TW_RE[ptr]) - PRODW'(f_im) * PRODW'(TW_IM[ptr]);
  assign p_im = PRODW'(f_re) * PRODW'(TW_IM[ptr]) + PRODW'(f_im) * PRODW'(TW_RE[ptr]);
  assign w_re_in = OW'((p_re + PRODW'(1 << (TW_FRAC-1))) >>> TW_FRAC);
  assign w_im_in = OW'((p_im + PRODW'(1 << (TW_FRAC-1))) >>> TW_FRAC);

  always_comb begin
    if (!half) begin
      y_re = w_re_in;
      y_im = w_im_in;
    end else begin
      y_re = f_re + x_re;
      y_im = f_im + x_im;
    end
  end

  always_ff @(posedge clk) begin
    if (!half) begin
      mem_re[ptr] <= x_re;
      mem_im[ptr] <= x_im;
    end else begin
      mem_re[ptr] <= f_re - x_re;
      mem_im[ptr] <= f_im - x_im;
    end
    out_re <= y_re;
    out_im <= y_im;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      cnt       <= '0;
      pend      <= 1'b0;
      out_start <= 1'b0;
    end else begin
      cnt       <= cur + 1'b1;
      if (in_start) pend <= 1'b1;
      out_start <= 1'b0;
      if ((pend || in_start) && half && ptr == '0) begin
        out_start <= 1'b1;
        pend      <= 1'b0;
      end
    end
  end
endmodule
