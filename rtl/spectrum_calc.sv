// spectrum_calc -- turns FFT bins into the value shipped per sample.
//
// For every bin (re, im) it forms the power re^2 + im^2 (two squarers and an
// adder) and the voltage sqrt(re^2 + im^2) (pipelined square root), and a
// multiplexer selects, per the DAQ mode, one 64-bit word per bin:
//   MODE_POWER   : power, unsigned 64 bit (the sum of two squares of 32-bit
//                  numbers is at most 2^63, so it always fits)
//   MODE_VOLTAGE : voltage, unsigned 32 bit, zero-extended
//   MODE_RAW     : {re[31:0], im[31:0]}
// The three outputs and the selecting multiplexer follow the published block
// diagram, as does the 8-byte sample size; the bit layout of the word and the
// mode encoding are choices of this implementation. The mode is sampled at
// `in_start`, so a mode change never splits a spectrum.
//
// IN_W may be at most 32 (the FFT output of the default design is 32 bit);
// narrower bins, as in reduced-size builds, are zero- or sign-extended.
//
// Timing: all three paths are delayed to a common latency of IN_W + 3 clocks
// (2 for squaring and adding, IN_W for the square root, 1 for the
// multiplexer); `out_valid`, `out_pos` and `out_start` are delayed alike.
module spectrum_calc
  import daq_pkg::*;
#(
  parameter int unsigned IN_W  = 32,
  parameter int unsigned POS_W = 14
) (
  input  logic                   clk,
  input  logic                   rst,
  input  daq_mode_e              mode,
  input  logic signed [IN_W-1:0] in_re,
  input  logic signed [IN_W-1:0] in_im,
  input  logic                   in_valid,
  input  logic                   in_start,
  input  logic [POS_W-1:0]       in_pos,
  output logic [63:0]            out_data,
  output logic                   out_valid,
  output logic                   out_start,
  output logic [POS_W-1:0]       out_pos,
  output daq_mode_e              out_mode
);
  localparam int unsigned PW  = 2 * IN_W;

  daq_mode_e         mode_q, mode_frame;
  logic [PW-1:0]     sq_re, sq_im, power;
  logic [IN_W-1:0]   volt;
  logic [PW-1:0]     power_d;
  logic [63:0]       raw_d;
  logic [1:0]        side_in, side_d;
  logic [1:0]        mode_d;

  // mode is held for a whole spectrum
  always_ff @(posedge clk) begin
    if (rst)           mode_q <= MODE_POWER;
    else if (in_start) mode_q <= mode;
  end
  assign mode_frame = in_start ? mode : mode_q;

  always_ff @(posedge clk) begin
    sq_re <= in_re * in_re;
    sq_im <= in_im * in_im;
    power <= sq_re + sq_im;
  end

  isqrt #(.IN_W(PW)) u_sqrt (.clk(clk), .x(power), .root(volt));

  delay_line #(.WIDTH(PW), .DEPTH(IN_W)) u_dpow (
    .clk(clk), .rst(rst), .din(power), .dout(power_d));
  // raw word: real and imaginary part, each sign-extended to 32 bits
  logic [63:0] raw_in;
  assign raw_in = {32'(in_re), 32'(in_im)};
  delay_line #(.WIDTH(64), .DEPTH(2 + IN_W)) u_draw (
    .clk(clk), .rst(rst), .din(raw_in), .dout(raw_d));
  assign side_in = {in_valid, in_start};
  delay_line #(.WIDTH(2), .DEPTH(2 + IN_W)) u_dside (
    .clk(clk), .rst(rst), .din(side_in), .dout(side_d));
  delay_line #(.WIDTH(2), .DEPTH(2 + IN_W)) u_dmode (
    .clk(clk), .rst(rst), .din(mode_frame), .dout(mode_d));
  logic [POS_W-1:0] pos_d;
  delay_line #(.WIDTH(POS_W), .DEPTH(2 + IN_W)) u_dpos (
    .clk(clk), .rst(rst), .din(in_pos), .dout(pos_d));

  // output multiplexer (SEL = DAQ mode)
  always_ff @(posedge clk) begin
    if (rst) begin
      out_valid <= 1'b0;
      out_start <= 1'b0;
      out_data  <= '0;
      out_pos   <= '0;
      out_mode  <= MODE_POWER;
    end else begin
      out_valid <= side_d[1];
      out_start <= side_d[0];
      out_pos   <= pos_d;
      out_mode  <= daq_mode_e'(mode_d);
      unique case (daq_mode_e'(mode_d))
        MODE_VOLTAGE: out_data <= 64'(volt);
        MODE_RAW:     out_data <= raw_d;
        default:      out_data <= 64'(power_d);
      endcase
    end
  end
endmodule
