// subsample_buffer -- 1/64 sub-sampling into ping-pong dual-port RAMs.
//
// Every 2^DECIM_LOG2-th filtered sample of a frame (sample index with its low
// DECIM_LOG2 bits zero) is written into one of two RAMs of 2^LOG2N words, at
// address = sample index / 2^DECIM_LOG2; with the defaults that is 16384
// samples at 1.6384 MHz per 10 ms frame. The frame parity selects the RAM
// being written. At each frame boundary the RAM that has just been filled is
// read out, one word per clock for 2^LOG2N clocks, and streamed through the
// output multiplexer to the FFT while the other RAM records the next frame,
// so no sample is ever lost. The 1/64 ratio, the 16384-sample blocks and the
// double RAM with multiplexer follow the published design; reading the full
// block in one burst right after the frame boundary is this implementation's
// choice (the burst takes 16384 of the 2^20 clocks of a frame).
//
// Interface: `idx` and `sync` from sync_gen, `bank` (frame parity before the
// boundary) from frame_counter. Output: `dout` with `valid`, and `start` high
// with the first word of a block. The block of the first frame after reset is
// read like any other; it is complete because sync_gen starts a frame right
// after reset, but `first_block` marks it for users who want to ignore it.
//
// Timing: the first word leaves two clocks after `sync` (address register,
// RAM read register).
module subsample_buffer #(
  parameter int unsigned WIDTH      = 18,
  parameter int unsigned LOG2N      = 14,
  parameter int unsigned DECIM_LOG2 = 6
) (
  input  logic                           clk,
  input  logic                           rst,
  input  logic                           sync,
  input  logic [LOG2N+DECIM_LOG2-1:0]    idx,
  input  logic                           bank,
  input  logic signed [WIDTH-1:0]        din,
  output logic signed [WIDTH-1:0]        dout,
  output logic                           valid,
  output logic                           start,
  output logic                           first_block
);
  localparam int unsigned N = 1 << LOG2N;

  logic             wbank;
  logic             we;
  logic [LOG2N-1:0] waddr;
  logic             seen;        // a frame has been recorded since reset
  logic             nblk;        // no block read yet
  logic             rd_act;
  logic [LOG2N-1:0] raddr;
  logic             rbank;
  logic             rv, rs;
  logic [WIDTH-1:0] q0, q1;

  // write side: bank flips at the boundary, so use the new parity at sync
  assign wbank = sync ? ~bank : bank;
  assign we    = (idx[DECIM_LOG2-1:0] == '0);
  assign waddr = idx[LOG2N+DECIM_LOG2-1:DECIM_LOG2];

  dp_ram #(.WIDTH(WIDTH), .DEPTH(N)) u_ram0 (
    .wclk(clk), .we(we && !wbank), .waddr(waddr), .wdata(din),
    .rclk(clk), .re(rd_act && !rbank), .raddr(raddr), .rdata(q0));
  dp_ram #(.WIDTH(WIDTH), .DEPTH(N)) u_ram1 (
    .wclk(clk), .we(we && wbank), .waddr(waddr), .wdata(din),
    .rclk(clk), .re(rd_act && rbank), .raddr(raddr), .rdata(q1));

  // read side: burst out the bank that has just been closed
  always_ff @(posedge clk) begin
    if (rst) begin
      seen   <= 1'b0;
      rd_act <= 1'b0;
      raddr  <= '0;
      rbank  <= 1'b0;
      nblk   <= 1'b1;
    end else if (sync) begin
      seen   <= 1'b1;
      rd_act <= seen;
      raddr  <= '0;
      rbank  <= bank;          // the bank written during the closing frame
    end else if (rd_act) begin
      raddr  <= raddr + 1'b1;
      if (raddr == LOG2N'(N - 1)) begin
        rd_act <= 1'b0;
        nblk   <= 1'b0;
      end
    end
  end

  // output multiplexer (SEL = bank being read)
  logic rbank_q;
  always_ff @(posedge clk) begin
    if (rst) begin
      rv <= 1'b0;
      rs <= 1'b0;
      rbank_q <= 1'b0;
      first_block <= 1'b0;
    end else begin
      rv <= rd_act;
      rs <= rd_act && (raddr == '0);
      rbank_q <= rbank;
      if (rd_act && raddr == '0) first_block <= nblk;
    end
  end

  assign dout  = rbank_q ? q1 : q0;
  assign valid = rv;
  assign start = rs;
endmodule
