// offset_cancel -- ADC DC-offset estimation and subtraction.
//
// The ADC codes of one whole frame (2^AVG_LOG2 samples) are summed; at each
// `sync` the sum divided by the frame length (an arithmetic shift) becomes the
// offset used for the next frame, and the accumulator restarts. Every sample
// leaves as `dout = din - offset`, saturated to DATA_W bits. Averaging over a
// frame is this implementation's reading of the "Offset Calculation" block,
// whose insides are not published; averaging over the 10 ms frame makes the
// estimate blind to the IF band (10.45-10.95 MHz).
//
// Interface: two's-complement ADC samples on `din` every clock. Timing: one
// register stage (`dout` follows `din` by one clock). Offset is 0 until the
// first full frame has been averaged.
module offset_cancel #(
  parameter int unsigned DATA_W   = 16,
  parameter int unsigned AVG_LOG2 = 20
) (
  input  logic                     clk,
  input  logic                     rst,
  input  logic                     sync,
  input  logic signed [DATA_W-1:0] din,
  output logic signed [DATA_W-1:0] dout,
  output logic signed [DATA_W-1:0] offset
);
  localparam int unsigned ACC_W = DATA_W + AVG_LOG2;
  localparam logic signed [DATA_W:0] MAXV = (DATA_W+1)'((1 << (DATA_W-1)) - 1);
  localparam logic signed [DATA_W:0] MINV = -(DATA_W+1)'(1 << (DATA_W-1));

  logic signed [ACC_W-1:0] acc;
  logic signed [ACC_W-1:0] acc_next;
  logic signed [DATA_W:0]  diff;

  assign acc_next = acc + ACC_W'(din);

  always_ff @(posedge clk) begin
    if (rst) begin
      acc    <= '0;
      offset <= '0;
    end else if (sync) begin
      offset <= DATA_W'(acc >>> AVG_LOG2);
      acc    <= ACC_W'(din);
    end else begin
      acc    <= acc_next;
    end
  end

  assign diff = (DATA_W+1)'(din) - (DATA_W+1)'(offset);

  always_ff @(posedge clk) begin
    if (rst)               dout <= '0;
    else if (diff > MAXV)  dout <= MAXV[DATA_W-1:0];
    else if (diff < MINV)  dout <= MINV[DATA_W-1:0];
    else                   dout <= diff[DATA_W-1:0];
  end
endmodule
