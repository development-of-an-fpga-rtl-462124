// tb_daq_mac_tx -- sends events from a RAM model and decodes the GMII
// stream with gmii_monitor (independent CRC): packet count per event,
// PKTID sequence, NSAMPLE (SPP, last packet the rest), sample values in bin
// order, EVTID, MODE, TIMESTAMP, addresses, and the overrun counter when a
// second start comes while busy. Also checks the event duration in clocks.
//
// Reduced sizes (21 bins, 8 samples per packet, 3 packets) keep it short.
// The packet layout checked is the published one; EtherType, byte order and
// gap length are this design's. A watchdog guards the run.
module tb_daq_mac_tx;
  localparam int NB = 21, SPP = 8, NP = 3;
  logic clk = 0, rst = 1, start = 0;
  logic [23:0] evt = 0;
  logic [1:0] mode = 0;
  logic [31:0] ts = 0;
  logic re;
  logic [4:0] raddr;
  logic [63:0] rdata;
  logic [7:0] txd;
  logic tx_en, tx_er, busy;
  logic [15:0] overrun;
  logic [63:0] ram [NB];
  logic [63:0] samples [NB];
  logic ev_done;
  logic [23:0] m_evt;
  logic [7:0] m_mode;
  int packets, events, shorts, errors, tsbad;
  logic [31:0] last_ts;
  int checks = 0, failures = 0, cyc = 0, t_start = 0;

  daq_mac_tx #(.NBINS(NB), .SPP(SPP), .NPKT(NP)) dut (
    .clk(clk), .rst(rst), .start(start), .evt(evt), .mode(mode),
    .dest_mac(48'hFF_FF_FF_FF_FF_FF), .src_mac(48'h02_00_00_00_CA_FE), .ts(ts),
    .re(re), .raddr(raddr), .rdata(rdata), .gmii_txd(txd), .gmii_tx_en(tx_en),
    .gmii_tx_er(tx_er), .busy(busy), .overrun(overrun));

  gmii_monitor #(.NBINS(NB), .SPP(SPP), .NPKT(NP)) mon (
    .clk(clk), .txd(txd), .tx_en(tx_en), .samples(samples), .event_done(ev_done),
    .evtid(m_evt), .mode(m_mode), .packets(packets), .events(events),
    .short_packets(shorts), .errors(errors), .last_ts(last_ts), .ts_steps_bad(tsbad));

  always #4 clk = ~clk;
  always @(posedge clk) begin
    cyc++;
    if (re) rdata <= ram[raddr];
    ts <= ts + 1;
  end

  initial begin
    repeat (3) @(posedge clk);
    @(negedge clk) rst = 0;
    for (int e = 0; e < 3; e++) begin
      for (int i = 0; i < NB; i++) ram[i] = {32'(e), 32'(i * 7 + 1)} ^ {$urandom, $urandom};
      @(negedge clk);
      evt = 24'(5 + e); mode = 2'(e); start = 1; t_start = cyc;
      @(negedge clk) start = 0;
      if (e == 1) begin                       // a start while busy is refused
        repeat (10) @(negedge clk);
        start = 1; @(negedge clk) start = 0;
      end
      while (busy) @(negedge clk);
      checks++;
      // 3 packets: 2 x (30 + 64 + 24) + (30 + 40 + 24) clocks
      // (+1: t_start is read half a clock before the edge that samples start)
      if (cyc - t_start != 1 + 2 * (30 + 8 * SPP + 24) + (30 + 8 * (NB - 2 * SPP) + 24)) begin
        failures++; $display("event took %0d clocks", cyc - t_start);
      end
      repeat (5) @(negedge clk);
      checks++;
      if (events != e + 1 || m_evt != 24'(5 + e) || m_mode != 8'(e)) begin
        failures++; $display("events %0d evt %0d mode %0d", events, m_evt, m_mode);
      end
      for (int i = 0; i < NB; i++) begin
        checks++;
        if (samples[i] != ram[i]) begin failures++; $display("ev %0d bin %0d %h != %h", e, i, samples[i], ram[i]); end
      end
    end
    checks++; if (packets != 3 * NP) begin failures++; $display("packets %0d", packets); end
    checks++; if (shorts != 3) begin failures++; $display("short packets %0d", shorts); end
    checks++; if (errors != 0) begin failures++; $display("format errors %0d", errors); end
    checks++; if (tsbad != 0) begin failures++; $display("timestamp went back"); end
    checks++; if (overrun != 1) begin failures++; $display("overrun %0d", overrun); end
    checks++; if (tx_er != 0) failures++;
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
