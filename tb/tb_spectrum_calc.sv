// tb_spectrum_calc -- random bins in all three modes: power = re^2 + im^2,
// voltage = floor(sqrt(power)), raw = {re, im}; fixed latency of 35 clock
// edges; the mode is taken at in_start and held for the whole spectrum.
//
// Power, voltage and raw outputs selected by the mode follow the published
// block diagram; the encoding and latency are this design's. A watchdog
// guards the run.
module tb_spectrum_calc;
  import daq_pkg::*;
  localparam int LAT = 2 + 32 + 1;
  logic clk = 0, rst = 1;
  daq_mode_e mode = MODE_POWER;
  logic signed [31:0] re = 0, im = 0;
  logic v = 0, st = 0;
  logic [13:0] pos = 0;
  logic [63:0] od;
  logic ov, os;
  logic [13:0] op;
  daq_mode_e om;
  typedef struct { longint re, im; int mode; bit v, s; int pos; } item_t;
  item_t hist [$];
  int checks = 0, failures = 0, modes_seen = 0;

  spectrum_calc dut (.clk(clk), .rst(rst), .mode(mode), .in_re(re), .in_im(im),
    .in_valid(v), .in_start(st), .in_pos(pos), .out_data(od), .out_valid(ov),
    .out_start(os), .out_pos(op), .out_mode(om));
  always #5 clk = ~clk;

  function automatic longint unsigned isq(longint unsigned x);
    longint unsigned r;
    r = longint'($sqrt(real'(x)));
    while (r * r > x) r--;
    while ((r + 1) * (r + 1) <= x) r++;
    return r;
  endfunction

  initial begin
    int frame_mode;
    repeat (2) @(posedge clk);
    @(negedge clk) rst = 0;
    frame_mode = 0;
    for (int t = 0; t < 1200; t++) begin
      item_t it;
      // a spectrum of 100 bins every 100 clocks; the mode input changes
      // randomly, but only its value at in_start counts
      st   = (t % 100 == 0);
      v    = 1;
      pos  = 14'(t % 100);
      mode = daq_mode_e'($urandom_range(0, 2));
      if (t == 7) begin re = 32'h8000_0000; im = 32'h8000_0000; end
      else begin re = 32'($urandom); im = 32'($urandom); end
      if (st) frame_mode = int'(mode);
      it.re = longint'(re); it.im = longint'(im); it.mode = frame_mode;
      it.v = v; it.s = st; it.pos = int'(pos);
      hist.push_back(it);
      @(negedge clk);
      if (t >= LAT - 1) begin
        item_t e;
        longint unsigned p, expv;
        e = hist[t - LAT + 1];
        p = longint'(e.re * e.re) + longint'(e.im * e.im);
        case (e.mode)
          0: expv = p;
          1: expv = isq(p);
          default: expv = {e.re[31:0], e.im[31:0]};
        endcase
        modes_seen |= 1 << e.mode;
        checks++;
        if (od != expv || ov != e.v || os != e.s || int'(op) != e.pos || int'(om) != e.mode) begin
          failures++;
          if (failures < 10) $display("t %0d mode %0d got %h exp %h", t, e.mode, od, expv);
        end
      end
    end
    checks++;
    if (modes_seen != 7) begin failures++; $display("modes seen %b", modes_seen); end
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
