// fft_r2sdf -- 2^LOG2N-point pipelined streaming FFT, radix-2 decimation in
// frequency, built as a chain of LOG2N single-path delay-feedback stages
// (spans 2^(LOG2N-1), ..., 2, 1).
//
// The published design uses a vendor FFT core configured as radix-2 DIF
// "pipelined streaming I/O" for 16384 points; this is an implementation of
// the same architecture. Input is one complex sample per clock in natural
// order, framed by `in_start`; the output comes one bin per clock in
// bit-reversed order: the p-th output word is bin bitrev(p). The word grows
// one bit per stage, from IN_W to IN_W + LOG2N bits (18 -> 32 by default),
// so the transform is unscaled: X[k] = sum_n x[n] exp(-j 2 pi n k / N), with
// rounding of every twiddle product. After the last input sample the source
// must keep feeding zeros (or anything) for N more clocks to flush the
// pipeline; a new transform may start every N clocks.
//
// Timing: out_start (bin of position 0) comes N - 1 + LOG2N clocks after
// in_start; `out_valid` is then high for N clocks with `out_pos` = p.
module fft_r2sdf #(
  parameter int unsigned IN_W  = 18,
  parameter int unsigned LOG2N = 14
) (
  input  logic                         clk,
  input  logic                         rst,
  input  logic signed [IN_W-1:0]       in_re,
  input  logic signed [IN_W-1:0]       in_im,
  input  logic                         in_start,
  output logic signed [IN_W+LOG2N-1:0] out_re,
  output logic signed [IN_W+LOG2N-1:0] out_im,
  output logic                         out_start,
  output logic                         out_valid,
  output logic [LOG2N-1:0]             out_pos
);
  localparam int unsigned OW = IN_W + LOG2N;

  logic signed [OW-1:0] re [LOG2N+1];
  logic signed [OW-1:0] im [LOG2N+1];
  logic                 st [LOG2N+1];

  assign re[0] = OW'(in_re);
  assign im[0] = OW'(in_im);
  assign st[0] = in_start;

  for (genvar s = 0; s < int'(LOG2N); s++) begin : g_stage
    localparam int unsigned W = IN_W + s;
    logic signed [W:0] o_re, o_im;
    fft_stage #(.IN_W(W), .SPAN(1 << (LOG2N - 1 - s))) u_stage (
      .clk(clk), .rst(rst),
      .in_re(re[s][W-1:0]), .in_im(im[s][W-1:0]), .in_start(st[s]),
      .out_re(o_re), .out_im(o_im), .out_start(st[s+1]));
    assign re[s+1] = OW'(o_re);
    assign im[s+1] = OW'(o_im);
  end

  assign out_re    = re[LOG2N];
  assign out_im    = im[LOG2N];
  assign out_start = st[LOG2N];

  // output framing: N bins, position 0 in the out_start cycle
  logic             active;
  logic [LOG2N-1:0] pos_q;
  always_ff @(posedge clk) begin
    if (rst) begin
      active <= 1'b0;
      pos_q  <= '0;
    end else if (out_start) begin
      active <= 1'b1;
      pos_q  <= LOG2N'(1);
    end else if (active) begin
      pos_q  <= pos_q + 1'b1;
      if (pos_q == '1) active <= 1'b0;
    end
  end
  assign out_pos   = out_start ? '0 : pos_q;
  assign out_valid = out_start || active;
endmodule
