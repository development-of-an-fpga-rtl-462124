// tb_fft_r2sdf -- two back-to-back random complex transforms of N = 2^L
// points against a direct DFT computed in floating point here. Output word
// p must be bin bitrev(p); error bound a few LSB (one rounding per stage).
// Also checks the latency N - 1 + L clock edges and the out_valid framing.
//
// The radix-2 DIF pipelined structure follows the published design; the
// reduced size (64 points), word growth and output order are this design's.
// A watchdog guards the run.
module tb_fft_r2sdf;
  localparam int L = 6, N = 1 << L, IW = 18, OW = IW + L;
  localparam real PI = 3.141592653589793;
  logic clk = 0, rst = 1;
  logic signed [IW-1:0] in_re = 0, in_im = 0;
  logic in_start = 0;
  logic signed [OW-1:0] out_re, out_im;
  logic out_start, out_valid;
  logic [L-1:0] out_pos;
  int xr [2][N], xi [2][N];
  int checks = 0, failures = 0, cyc = 0, t0 = 0, blk = 0, nout = 0;
  real maxerr = 0;

  fft_r2sdf #(.IN_W(IW), .LOG2N(L)) dut (
    .clk(clk), .rst(rst), .in_re(in_re), .in_im(in_im), .in_start(in_start),
    .out_re(out_re), .out_im(out_im), .out_start(out_start),
    .out_valid(out_valid), .out_pos(out_pos));

  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  function automatic int brev(int p);
    int r = 0;
    for (int i = 0; i < L; i++) if (p & (1 << i)) r |= 1 << (L - 1 - i);
    return r;
  endfunction

  always @(posedge clk) begin
    if (out_start) begin
      checks++;
      // t0 is taken half a clock before the edge that samples in_start
      if (cyc - t0 != N + L + blk * N) begin
        failures++; $display("latency %0d", cyc - t0 - blk * N);
      end
    end
    if (out_valid) begin
      real er, ei, a, e;
      int k;
      k = brev(int'(out_pos));
      er = 0; ei = 0;
      for (int n = 0; n < N; n++) begin
        a = -2.0 * PI * real'(n * k) / real'(N);
        er += real'(xr[blk][n]) * $cos(a) - real'(xi[blk][n]) * $sin(a);
        ei += real'(xr[blk][n]) * $sin(a) + real'(xi[blk][n]) * $cos(a);
      end
      e = (real'(out_re) - er) ** 2 + (real'(out_im) - ei) ** 2;
      e = $sqrt(e);
      if (e > maxerr) maxerr = e;
      checks++;
      if (e > 4.0 * L) begin
        failures++;
        if (failures < 10) $display("blk %0d bin %0d got %0d %0d exp %f %f", blk, k, out_re, out_im, er, ei);
      end
      nout++;
      if (out_pos == '1) blk++;
    end
  end

  initial begin
    for (int b = 0; b < 2; b++)
      for (int n = 0; n < N; n++) begin
        if (b == 0) begin  // full-scale corner: real tone plus random
          xr[b][n] = (n % 2 == 0) ? 131071 : -131072;
          xi[b][n] = 0;
        end else begin
          // |x| <= 2^17 keeps every stage inside its word (as for real input)
          xr[b][n] = int'($urandom_range(0, 185000)) - 92500;
          xi[b][n] = int'($urandom_range(0, 185000)) - 92500;
        end
      end
    repeat (3) @(posedge clk);
    @(negedge clk) rst = 0;
    for (int b = 0; b < 2; b++)
      for (int n = 0; n < N; n++) begin
        @(negedge clk);
        if (b == 0 && n == 0) t0 = cyc;
        in_start = (n == 0);
        in_re = IW'(xr[b][n]);
        in_im = IW'(xi[b][n]);
      end
    @(negedge clk);
    in_start = 0; in_re = 0; in_im = 0;
    repeat (2 * N + 3 * L) @(posedge clk);
    checks++;
    if (nout != 2 * N) begin failures++; $display("outputs %0d", nout); end
    $display("max error %f", maxerr);
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
