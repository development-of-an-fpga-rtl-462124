`timescale 1ns/1ps
// tb_daq_top_full -- the DAQ at its full size: daq_top with every parameter
// at its default (2^20-sample 10 ms frames, 1/64 sub-sampling, 16384-point
// FFT, 5001 bins in 32 packets: 31 of 160 samples and one of 41).
//
// The ADC model puts a cosine of amplitude 6000 LSB at 10.45 MHz + K x 100 Hz
// (exactly on FFT bin K), on a DC offset of 300 LSB with +-8 LSB of noise.
// The GMII frames are decoded by gmii_monitor (preamble, headers, trailer,
// FCS, PKTID order, NSAMPLE). Per event the testbench checks that the
// spectrum peaks at bin K and that every other bin is at least 40 dB lower
// in power; EVTID must step by one. After the first event the processor port
// switches the design to voltage mode, and the voltage of the later events
// must be the square root of the earlier power (within 1 %). The frame
// period (2^20 ADC clocks between sync pulses) and the offset estimate are
// checked too. Three events take about 4.2 frames, i.e. 4.4 million ADC
// clocks.
module tb_daq_top_full;
  localparam int FL = 20, K = 1234, NB = 5001, NP = 32;
  localparam int INC = 104500;
  localparam real PI = 3.141592653589793;

  logic adc_clk = 0, gt_clk = 0, sys_clk = 0;
  logic adc_rst = 1, gt_rst = 1, sys_rst = 1;
  logic signed [15:0] adc_data = 0;
  logic [7:0] txd;
  logic tx_en, tx_er;
  logic cpu_we = 0;
  logic [7:0] cpu_addr = 0;
  logic [31:0] cpu_wdata = 0, cpu_rdata;
  logic sysmon_clk, frame_sync, mac_busy;
  logic signed [15:0] adc_offset;
  logic [23:0] frame_evt;
  logic [15:0] mac_overrun, cfg_dropped;

  daq_top dut (
    .adc_clk(adc_clk), .adc_rst(adc_rst), .adc_data(adc_data),
    .gt_clk(gt_clk), .gt_rst(gt_rst), .gmii_txd(txd), .gmii_tx_en(tx_en),
    .gmii_tx_er(tx_er), .gmii_rxd(8'd0), .gmii_rx_dv(1'b0), .gmii_rx_er(1'b0),
    .cpu_we(cpu_we), .cpu_addr(cpu_addr), .cpu_wdata(cpu_wdata), .cpu_rdata(cpu_rdata),
    .sys_clk(sys_clk), .sys_rst(sys_rst), .sysmon_clk(sysmon_clk),
    .frame_sync(frame_sync), .adc_offset(adc_offset), .frame_evt(frame_evt),
    .mac_busy(mac_busy), .mac_overrun(mac_overrun), .cfg_dropped(cfg_dropped));

  logic [63:0] samples [NB];
  logic ev_done;
  logic [23:0] m_evt;
  logic [7:0] m_mode;
  int packets, events, shorts, errors, tsbad;
  logic [31:0] last_ts;
  gmii_monitor mon (
    .clk(gt_clk), .txd(txd), .tx_en(tx_en && !gt_rst), .samples(samples), .event_done(ev_done),
    .evtid(m_evt), .mode(m_mode), .packets(packets), .events(events),
    .short_packets(shorts), .errors(errors), .last_ts(last_ts), .ts_steps_bad(tsbad));

  always #4.76837 adc_clk = ~adc_clk;   // 104.8576 MHz
  always #4.0     gt_clk  = ~gt_clk;    // 125 MHz
  always #1.66667 sys_clk = ~sys_clk;   // 300 MHz

  longint n = 0;
  always @(posedge adc_clk) begin
    real a;
    a = 2.0 * PI * real'(longint'(INC + K) * (n % (1 << FL))) / real'(1 << FL);
    adc_data <= 16'($rtoi(6000.0 * $cos(a)) + 300 + int'($urandom_range(0, 16)) - 8);
    n <= adc_rst ? 0 : n + 1;
  end

  int checks = 0, failures = 0;
  int last_evt = -1, syncs = 0;
  longint last_sync = -1;
  real pow_ref = 0;
  int cnt_mode [2] = '{0, 0};

  task automatic chk(bit c, string m);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", m); end
  endtask

  always @(posedge adc_clk) if (frame_sync) begin
    syncs++;
    if (last_sync >= 0) chk(n - last_sync == (1 << FL), "frame period");
    last_sync = n;
  end

  always @(posedge gt_clk) if (ev_done) begin
    int pk; real pv, other, m;
    pk = 0; pv = -1; other = 0;
    for (int b = 0; b < NB; b++) begin
      m = (m_mode == 0) ? real'(samples[b]) : real'(samples[b][31:0]) ** 2;
      if (m > pv) begin pv = m; pk = b; end
      if (b != K && m > other) other = m;
    end
    $display("event %0d mode %0d: peak bin %0d power %g, next %g", m_evt, m_mode, pk, pv, other);
    chk(pk == K, "peak bin");
    chk(other < pv / 1.0e4, "peak not 40 dB above the rest");
    if (m_mode == 0) begin pow_ref = pv; cnt_mode[0]++; end
    if (m_mode == 1) begin
      cnt_mode[1]++;
      chk(pow_ref > 0 && pv > 0.98 * pow_ref && pv < 1.02 * pow_ref, "voltage^2 != power");
    end
    if (last_evt >= 0) chk(int'(m_evt) == last_evt + 1, "EVTID step");
    last_evt = int'(m_evt);
  end

  initial begin
    repeat (5) @(posedge adc_clk);
    adc_rst = 0; gt_rst = 0; sys_rst = 0;
    while (events < 1) @(posedge gt_clk);
    @(negedge gt_clk) cpu_we = 1; cpu_addr = 8'h00; cpu_wdata = 32'd1;   // voltage mode
    @(negedge gt_clk) cpu_we = 0;
    while (events < 3) @(posedge gt_clk);
    repeat (2) @(posedge gt_clk);
    chk(adc_offset > 295 && adc_offset < 305, $sformatf("offset %0d", adc_offset));
    chk(errors == 0, $sformatf("%0d packet format errors", errors));
    chk(packets == 3 * NP, $sformatf("packets %0d", packets));
    chk(shorts == 3, "one 41-sample packet per event");
    chk(tsbad == 0, "timestamps not monotonic");
    chk(mac_overrun == 0, "MAC overrun");
    chk(cnt_mode[0] > 0 && cnt_mode[1] > 0, "both power and voltage mode seen");
    $display("syncs %0d events %0d packets %0d", syncs, events, packets);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (5 * (1 << FL)) @(posedge adc_clk);
    failures++;
    $display("watchdog: events %0d", events);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
