`timescale 1ns/1ps
// tb_freq_sweep -- frequency-reconstruction sweep through the whole DAQ.
//
// The published test steps a sine through the analysis window in 100 Hz
// steps and asks that the measured peak bin always equal
// (f - 10.45 MHz) / 100 Hz, that no bin is missing and that the gain is
// flat. Here the same is done through daq_top with the full 1/64
// sub-sampling and the real FIR, but with a 256-point FFT (frames of
// 2^14 ADC clocks) so that every bin of the window can be visited: the
// window then holds 79 bins (the same 30.5 % of the FFT as 5001 of 16384),
// sent in 9 packets of 8 samples and one of 7. The LO step is 1633 frame
// bins (10.452 MHz at this frame length).
//
// The ADC model plays, in frame f, a cosine of amplitude 6000 LSB exactly
// on bin f mod 79 (phase restarting at each frame). For every event decoded
// by gmii_monitor the peak bin must be one above that of the previous event
// (mod 79), the peak must stand 40 dB above all other bins, and after a
// full sweep every bin 0..78 must have been the peak exactly once. The
// peak power of bins 1..78 must agree within 0.3 dB (FIR pass-band ripple).
// Bin 0 is expected high, by up to 6 dB: a tone exactly at the LO mixes to
// DC, where the cosine is not split between +f and -f, and the DC level
// depends on the tone's phase against the LO (4 cos^2 of it in power; here
// the two are one ADC sample apart, +4.1 dB). A watchdog guards the run.
module tb_freq_sweep;
  localparam int L = 8, D = 6, FL = L + D, INC = 1633;
  localparam int NB = 79, SPP = 8, NP = 10;
  localparam real PI = 3.141592653589793;

  logic adc_clk = 0, gt_clk = 0, sys_clk = 0;
  logic adc_rst = 1, gt_rst = 1, sys_rst = 1;
  logic signed [15:0] adc_data = 0;
  logic [7:0] txd;
  logic tx_en, tx_er;
  logic [31:0] cpu_rdata;
  logic sysmon_clk, frame_sync, mac_busy;
  logic signed [15:0] adc_offset;
  logic [23:0] frame_evt;
  logic [15:0] mac_overrun, cfg_dropped;

  daq_top #(.LOG2N(L), .DECIM_LOG2(D), .PHASE_INC(INC), .NBINS(NB), .SPP(SPP),
            .NPKT(NP)) dut (
    .adc_clk(adc_clk), .adc_rst(adc_rst), .adc_data(adc_data),
    .gt_clk(gt_clk), .gt_rst(gt_rst), .gmii_txd(txd), .gmii_tx_en(tx_en),
    .gmii_tx_er(tx_er), .gmii_rxd(8'd0), .gmii_rx_dv(1'b0), .gmii_rx_er(1'b0),
    .cpu_we(1'b0), .cpu_addr(8'd0), .cpu_wdata(32'd0), .cpu_rdata(cpu_rdata),
    .sys_clk(sys_clk), .sys_rst(sys_rst), .sysmon_clk(sysmon_clk),
    .frame_sync(frame_sync), .adc_offset(adc_offset), .frame_evt(frame_evt),
    .mac_busy(mac_busy), .mac_overrun(mac_overrun), .cfg_dropped(cfg_dropped));

  logic [63:0] samples [NB];
  logic ev_done;
  logic [23:0] m_evt;
  logic [7:0] m_mode;
  int packets, events, shorts, errors, tsbad;
  logic [31:0] last_ts;
  gmii_monitor #(.NBINS(NB), .SPP(SPP), .NPKT(NP)) mon (
    .clk(gt_clk), .txd(txd), .tx_en(tx_en && !gt_rst), .samples(samples), .event_done(ev_done),
    .evtid(m_evt), .mode(m_mode), .packets(packets), .events(events),
    .short_packets(shorts), .errors(errors), .last_ts(last_ts), .ts_steps_bad(tsbad));

  always #4.76837 adc_clk = ~adc_clk;   // 104.8576 MHz
  always #4.0     gt_clk  = ~gt_clk;    // 125 MHz
  always #1.66667 sys_clk = ~sys_clk;   // 300 MHz

  longint n = 0;
  always @(posedge adc_clk) begin
    real a;
    int b;
    b = int'((n >> FL) % NB);
    a = 2.0 * PI * real'(longint'(INC + b) * (n % (1 << FL))) / real'(1 << FL);
    adc_data <= 16'($rtoi(6000.0 * $cos(a)) + int'($urandom_range(0, 8)) - 4);
    n <= adc_rst ? 0 : n + 1;
  end

  int checks = 0, failures = 0;
  int prev_pk = -1, swept = 0;
  int hits [NB];
  real pw [NB];

  task automatic chk(bit c, string m);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", m); end
  endtask

  always @(posedge gt_clk) if (ev_done && events > 1) begin
    int pk; real pv, other, m;
    pk = 0; pv = -1; other = 0;
    for (int b = 0; b < NB; b++) begin
      m = real'(samples[b]);
      if (m > pv) begin pv = m; pk = b; end
    end
    for (int b = 0; b < NB; b++) begin
      m = real'(samples[b]);
      if (b != pk && m > other) other = m;
    end
    chk(other < pv / 1.0e4, $sformatf("event %0d: peak %0d not 40 dB above the rest", m_evt, pk));
    if (prev_pk >= 0) begin
      chk(pk == (prev_pk + 1) % NB, $sformatf("event %0d: peak %0d after %0d", m_evt, pk, prev_pk));
      hits[pk]++;
      pw[pk] = pv;
      swept++;
    end
    prev_pk = pk;
  end

  initial begin
    for (int b = 0; b < NB; b++) begin hits[b] = 0; pw[b] = 0; end
    repeat (5) @(posedge adc_clk);
    adc_rst = 0; gt_rst = 0; sys_rst = 0;
    while (swept < NB) @(posedge gt_clk);
    repeat (2) @(posedge gt_clk);
    begin
      real lo, hi;
      lo = 1.0e300; hi = 0;
      for (int b = 0; b < NB; b++) chk(hits[b] == 1, $sformatf("bin %0d peak %0d times", b, hits[b]));
      for (int b = 1; b < NB; b++) begin
        if (pw[b] < lo) lo = pw[b];
        if (pw[b] > hi) hi = pw[b];
      end
      $display("bins 1..%0d: gain spread %.3f dB; bin 0 / bin 1 = %.2f dB",
               NB - 1, 10.0 * $log10(hi / lo), 10.0 * $log10(pw[0] / pw[1]));
      chk(hi / lo < 1.072, "gain not flat within 0.3 dB");
      chk(pw[0] / pw[1] > 1.0 && pw[0] / pw[1] < 4.2, "bin 0 not 0..6 dB above bin 1");
    end
    chk(errors == 0, $sformatf("%0d packet format errors", errors));
    chk(mac_overrun == 0, "MAC overrun");
    $display("events %0d swept %0d packets %0d", events, swept, packets);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat ((NB + 10) * (1 << FL)) @(posedge adc_clk);
    failures++;
    $display("watchdog: events %0d swept %0d", events, swept);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
