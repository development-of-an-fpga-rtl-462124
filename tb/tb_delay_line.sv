// tb_delay_line -- test of the shift register that aligns the ADC samples
// with the LO.
//
// Random words are pushed in every clock after reset and kept in a queue;
// each output word must equal the input of exactly DEPTH clocks earlier (a
// reduced DEPTH of 7 and width of 12 are used). The depth is this design's
// choice; the block itself is the published "Shift Register". A watchdog
// stops the run if it hangs.
module tb_delay_line;
  localparam int W = 12, D = 7;
  logic clk = 0, rst = 1;
  logic [W-1:0] din = 0, dout;
  logic [W-1:0] hist [$];
  int checks = 0, failures = 0;
  delay_line #(.WIDTH(W), .DEPTH(D)) dut (.clk(clk), .rst(rst), .din(din), .dout(dout));
  always #5 clk = ~clk;
  initial begin
    repeat (2) @(posedge clk);
    @(negedge clk) rst = 0;
    for (int t = 0; t < 200; t++) begin
      din = W'($urandom);
      hist.push_back(din);
      @(posedge clk); #1;
      if (t >= D - 1) begin
        checks++;
        if (dout != hist[t - D + 1]) begin failures++; $display("t %0d dout %h exp %h", t, dout, hist[t-D+1]); end
      end else begin
        checks++;
        if (dout != 0) begin failures++; $display("not cleared by reset"); end
      end
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
