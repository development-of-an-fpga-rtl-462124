// tb_subsample_buffer -- a frame of 2^(L+D) samples is sub-sampled 1/2^D
// into one RAM; the block must come out in order, without gaps, right after
// the next frame boundary, while the other RAM records; both banks must be
// used in turn. Input sample value = (frame * 1000 + index) mod 2^18.
//
// 1/64 sub-sampling into ping-pong RAMs is the published scheme; here the
// sizes are reduced (1/4, 16-sample blocks). A watchdog guards the run.
module tb_subsample_buffer;
  localparam int L = 4, D = 2, FL = L + D, N = 1 << L;
  logic clk = 0, rst = 1;
  logic [FL-1:0] idx;
  logic sync, bank;
  logic [23:0] evt;
  logic signed [17:0] din, dout;
  logic valid, start, first;
  int checks = 0, failures = 0, blocks = 0, outn = 0, banks_seen = 0;
  int frame_of_block;
  int t_sync, t_start;
  int cyc = 0;

  sync_gen #(.CNT_W(FL)) u_s (.clk(clk), .rst(rst), .idx(idx), .sync(sync));
  frame_counter u_f (.clk(clk), .rst(rst), .sync(sync), .evt(evt), .bank(bank));
  subsample_buffer #(.WIDTH(18), .LOG2N(L), .DECIM_LOG2(D)) dut (
    .clk(clk), .rst(rst), .sync(sync), .idx(idx), .bank(bank), .din(din),
    .dout(dout), .valid(valid), .start(start), .first_block(first));

  // frame number of the sample currently presented (evt increments after sync)
  assign din = 18'((((sync ? int'(evt) + 1 : int'(evt))) * 1000 + int'(idx)) % (1 << 18));

  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  always @(posedge clk) if (!rst) begin
    if (sync) t_sync = cyc;
    if (start) begin
      blocks++;
      outn = 0;
      frame_of_block = int'(evt) - 1;
      checks++;
      if (cyc - t_sync != 2) begin failures++; $display("start %0d clocks after sync", cyc - t_sync); end
      if (bank) banks_seen |= 2; else banks_seen |= 1;
    end
    if (valid) begin
      checks++;
      if (int'(dout) != (frame_of_block * 1000 + outn * (1 << D)) % (1 << 18)) begin
        failures++; $display("block %0d word %0d = %0d", frame_of_block, outn, dout);
      end
      outn++;
    end else if (outn != 0 && outn != N) begin
      failures++; $display("gap in block at word %0d", outn);
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    @(negedge clk) rst = 0;
    repeat (6 * (1 << FL) + 30) @(posedge clk);
    checks++;
    if (blocks != 6) begin failures++; $display("blocks %0d", blocks); end
    checks++;
    if (banks_seen != 3) begin failures++; $display("only one bank used"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
