`timescale 1ns/1ps
// tb_daq_top -- end-to-end test of the DAQ at reduced size (64-point FFT,
// 1/16 sub-sampling, 1024-sample frames, 20 bins in 3 packets).
//
// The ADC model delivers a cosine exactly on FFT bin K above the LO, plus a
// DC offset and a little noise, on the ADC clock; GMII frames are decoded
// by gmii_monitor. Checked: the peak of every spectrum is at bin K; the DC
// offset is estimated; EVTID rises by one per event; the packet format and
// FCS; a configuration frame over GMII switches to voltage mode (voltage^2
// matches the earlier power), a processor write switches to raw mode
// (|re + j im| matches the voltage); a frame with a bad FCS is dropped.
// Every mechanism (frame sync, both RAM banks, FFT, each of the three modes,
// network and processor configuration, dropped frame, short last packet,
// system-monitor clock) is counted and must occur at least once.
module tb_daq_top;
  localparam int L = 6, D = 4, FL = L + D, INC = 102, K = 5;
  localparam int NB = 20, SPP = 8, NP = 3;
  localparam real PI = 3.141592653589793;

  logic adc_clk = 0, gt_clk = 0, sys_clk = 0;
  logic adc_rst = 1, gt_rst = 1, sys_rst = 1;
  logic signed [15:0] adc_data = 0;
  logic [7:0] txd, rxd = 0;
  logic tx_en, tx_er, rx_dv = 0, rx_er = 0;
  logic cpu_we = 0;
  logic [7:0] cpu_addr = 0;
  logic [31:0] cpu_wdata = 0, cpu_rdata;
  logic sysmon_clk, frame_sync, mac_busy;
  logic signed [15:0] adc_offset;
  logic [23:0] frame_evt;
  logic [15:0] mac_overrun, cfg_dropped;

  daq_top #(.LOG2N(L), .DECIM_LOG2(D), .PHASE_INC(INC), .NBINS(NB), .SPP(SPP),
            .NPKT(NP), .TS_DIV(10)) dut (
    .adc_clk(adc_clk), .adc_rst(adc_rst), .adc_data(adc_data),
    .gt_clk(gt_clk), .gt_rst(gt_rst), .gmii_txd(txd), .gmii_tx_en(tx_en),
    .gmii_tx_er(tx_er), .gmii_rxd(rxd), .gmii_rx_dv(rx_dv), .gmii_rx_er(rx_er),
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
  gmii_monitor #(.NBINS(NB), .SPP(SPP), .NPKT(NP)) mon (
    .clk(gt_clk), .txd(txd), .tx_en(tx_en && !gt_rst), .samples(samples), .event_done(ev_done),
    .evtid(m_evt), .mode(m_mode), .packets(packets), .events(events),
    .short_packets(shorts), .errors(errors), .last_ts(last_ts), .ts_steps_bad(tsbad));

  always #4.76837 adc_clk = ~adc_clk;   // 104.8576 MHz
  always #4.0     gt_clk  = ~gt_clk;    // 125 MHz
  always #1.66667 sys_clk = ~sys_clk;   // 300 MHz

  // ADC model: tone on bin K, DC offset 200, +-8 LSB noise
  longint n = 0;
  always @(posedge adc_clk) begin
    real a;
    a = 2.0 * PI * real'(longint'(INC + K) * (n % (1 << FL))) / real'(1 << FL);
    adc_data <= 16'($rtoi(6000.0 * $cos(a)) + 200 + int'($urandom_range(0, 16)) - 8);
    n <= adc_rst ? 0 : n + 1;
  end

  int checks = 0, failures = 0;
  int cnt_sync = 0, cnt_bank0 = 0, cnt_bank1 = 0, cnt_fft = 0, cnt_sysmon = 0;
  int cnt_mode [3] = '{0, 0, 0};
  int last_evt = -1;
  real pow_ref = 0, volt_ref = 0;
  logic sm_q = 0;

  always @(posedge adc_clk) if (frame_sync) begin
    cnt_sync++;
    if (dut.u_frames.bank) cnt_bank1++; else cnt_bank0++;
  end
  always @(posedge adc_clk) if (dut.u_fft.out_start) cnt_fft++;
  always @(posedge sys_clk) begin if (sysmon_clk && !sm_q) cnt_sysmon++; sm_q <= sysmon_clk; end

  task automatic chk(bit c, string m);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", m); end
  endtask

  function automatic real mag(logic [63:0] v, int mode);
    case (mode)
      0: return real'(v);
      1: return real'(v[31:0]);
      default: return $sqrt(real'($signed(v[63:32])) ** 2 + real'($signed(v[31:0])) ** 2);
    endcase
  endfunction

  // check every event as it completes
  always @(posedge gt_clk) if (ev_done) begin
    int pk; real pv, other, m;
    pk = 0; pv = -1; other = 0;
    for (int b = 0; b < NB; b++) begin
      m = mag(samples[b], int'(m_mode));
      if (m > pv) begin pv = m; pk = b; end
      if (b != K && m > other) other = m;
    end
    if (events > 1) begin   // the first spectrum may hold the start-up transient
      chk(pk == K, $sformatf("event %0d mode %0d peak at bin %0d", m_evt, m_mode, pk));
      chk(other < pv / ((m_mode == 0) ? 100.0 : 10.0), "peak not dominant");
      if (m_mode <= 2) cnt_mode[m_mode]++;
      if (m_mode == 0) pow_ref = pv;
      if (m_mode == 1) begin
        volt_ref = pv;
        if (pow_ref > 0) chk(pv * pv > 0.98 * pow_ref && pv * pv < 1.02 * pow_ref, "voltage^2 != power");
      end
      if (m_mode == 2 && volt_ref > 0) chk(pv > 0.99 * volt_ref && pv < 1.01 * volt_ref, "|raw| != voltage");
    end
    if (last_evt >= 0) chk(int'(m_evt) == last_evt + 1, "EVTID step");
    last_evt = int'(m_evt);
  end

  task automatic send_cfg(logic [7:0] a, logic [31:0] d, bit bad);
    logic [7:0] f [64];
    logic [31:0] c;
    for (int i = 0; i < 12; i++) f[i] = 8'h02;
    f[12] = 8'h88; f[13] = 8'hB5; f[14] = a;
    {f[15], f[16], f[17], f[18]} = d;
    for (int i = 19; i < 60; i++) f[i] = 0;
    c = 32'hFFFF_FFFF;
    for (int i = 0; i < 60; i++)
      for (int b = 0; b < 8; b++) begin
        logic fb = c[0] ^ f[i][b];
        c = c >> 1;
        if (fb) c ^= 32'hEDB88320;
      end
    c = ~c ^ (bad ? 32'h1 : 32'h0);
    {f[63], f[62], f[61], f[60]} = c;
    for (int i = 0; i < 72; i++) begin
      @(negedge gt_clk) rx_dv = 1; rxd = (i < 7) ? 8'h55 : (i == 7) ? 8'hD5 : f[i - 8];
    end
    @(negedge gt_clk) rx_dv = 0;
  endtask

  task automatic wait_events(int k);
    int target = events + k;
    while (events < target) @(posedge gt_clk);
  endtask

  initial begin
    repeat (5) @(posedge adc_clk);
    adc_rst = 0; gt_rst = 0; sys_rst = 0;
    wait_events(3);                           // power mode
    chk(adc_offset > 195 && adc_offset < 205, $sformatf("offset %0d", adc_offset));
    send_cfg(8'h00, 32'd0, 1);                // bad FCS: ignored
    send_cfg(8'h00, 32'd1, 0);                // voltage mode over the network
    wait_events(3);
    @(negedge gt_clk) cpu_we = 1; cpu_addr = 8'h00; cpu_wdata = 32'd2;   // raw mode
    @(negedge gt_clk) cpu_we = 0;
    #1 chk(cpu_rdata == 32'd2, "processor read-back");
    wait_events(3);
    repeat (2) @(posedge gt_clk);
    chk(errors == 0, $sformatf("%0d packet format errors", errors));
    chk(tsbad == 0, "timestamps not monotonic");
    chk(mac_overrun == 0, "MAC overrun");
    chk(cfg_dropped == 1, $sformatf("dropped frames %0d", cfg_dropped));
    chk(packets == events * NP, "packets per event");
    chk(shorts == events, "short last packet per event");
    chk(cnt_sync > 0 && cnt_bank0 > 0 && cnt_bank1 > 0, "frame sync / both RAM banks");
    chk(cnt_fft >= events, "FFT runs");
    chk(cnt_mode[0] > 0 && cnt_mode[1] > 0 && cnt_mode[2] > 0, "all three modes");
    chk(cnt_sysmon > 10, "system monitor clock");
    $display("syncs %0d banks %0d/%0d ffts %0d events %0d packets %0d modes %0d/%0d/%0d dropped %0d sysmon %0d",
      cnt_sync, cnt_bank0, cnt_bank1, cnt_fft, events, packets, cnt_mode[0], cnt_mode[1], cnt_mode[2],
      cfg_dropped, cnt_sysmon);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (40 * (1 << FL)) @(posedge adc_clk);
    failures++;
    $display("watchdog: events %0d", events);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
