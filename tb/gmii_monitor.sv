// gmii_monitor -- testbench receiver for the DAQ's packets on GMII.
//
// Collects the bytes of every frame (tx_en high), checks preamble, SFD,
// Ethernet header, the DAQ header, trailer (identifier, NSAMPLE) and the
// CRC-32 frame check sequence (computed bit by bit here, independently of
// the design's byte-wise function), and stores the 64-bit samples of each
// event in `samples` at their bin number pktid * SPP + i. When the last
// packet of an event has arrived, `event_done` pulses for one clock with the
// event's `evtid` and `mode`. Errors are counted in `errors`.
//
// It is a testbench-only receiver; it follows the published packet layout
// and this design's choices for EtherType and byte order.
module gmii_monitor #(
  parameter int NBINS = 5001,
  parameter int SPP   = 160,
  parameter int NPKT  = 32,
  parameter logic [47:0] DEST = 48'hFF_FF_FF_FF_FF_FF,
  parameter logic [47:0] SRC  = 48'h02_00_00_00_CA_FE
) (
  input  logic        clk,
  input  logic [7:0]  txd,
  input  logic        tx_en,
  output logic [63:0] samples [NBINS],
  output logic        event_done,
  output logic [23:0] evtid,
  output logic [7:0]  mode,
  output int          packets,
  output int          events,
  output int          short_packets,
  output int          errors,
  output logic [31:0] last_ts,
  output int          ts_steps_bad
);
  logic [7:0] buff [2048];
  int         n;
  logic       en_q;
  logic [31:0] prev_ts;
  int          pkt_expect;
  bit          have_ts;

  function automatic logic [31:0] crc_bits(input int first, input int cnt);
    logic [31:0] c = 32'hFFFF_FFFF;
    for (int i = first; i < first + cnt; i++)
      for (int b = 0; b < 8; b++) begin
        logic fb;
        fb = c[0] ^ buff[i][b];
        c  = c >> 1;
        if (fb) c = c ^ 32'hEDB88320;
      end
    return ~c;
  endfunction

  initial begin
    packets = 0; events = 0; errors = 0; short_packets = 0; ts_steps_bad = 0;
    n = 0; en_q = 0; event_done = 0; pkt_expect = 0; have_ts = 0; prev_ts = 0;
    evtid = '0; mode = '0; last_ts = '0;
    for (int i = 0; i < NBINS; i++) samples[i] = '0;
  end

  task automatic parse();
    logic [47:0] d, s;
    logic [15:0] ty, ns;
    logic [23:0] ev;
    logic [7:0]  pid, md;
    logic [31:0] ts, fcs, crc;
    logic [39:0] ident;
    int nexp, p;
    packets++;
    for (int i = 0; i < 7; i++) if (buff[i] != 8'h55) begin errors++; $display("monitor: bad preamble"); end
    if (buff[7] != 8'hD5) begin errors++; $display("monitor: bad SFD"); end
    d = '0; s = '0;
    for (int i = 0; i < 6; i++) begin d = {d[39:0], buff[8+i]}; s = {s[39:0], buff[14+i]}; end
    ty  = {buff[20], buff[21]};
    ev  = {buff[22], buff[23], buff[24]};
    pid = buff[25];
    ts  = {buff[26], buff[27], buff[28], buff[29]};
    nexp = (int'(pid) == NPKT - 1) ? NBINS - (NPKT - 1) * SPP : SPP;
    if (n != 8 + 22 + 8 * nexp + 8 + 4) begin
      errors++; $display("monitor: length %0d, expected %0d", n, 8 + 22 + 8 * nexp + 8 + 4);
      return;
    end
    p = 30 + 8 * nexp;
    ident = {buff[p], buff[p+1], buff[p+2], buff[p+3], buff[p+4]};
    md    = buff[p+5];
    ns    = {buff[p+6], buff[p+7]};
    fcs   = {buff[p+11], buff[p+10], buff[p+9], buff[p+8]};
    crc   = crc_bits(8, p);          // header, data and trailer
    if (d != DEST || s != SRC)  begin errors++; $display("monitor: bad MAC addresses"); end
    if (ty != 16'h88B5)         begin errors++; $display("monitor: bad EtherType %h", ty); end
    if (ident != 40'h4341505000) begin errors++; $display("monitor: bad identifier"); end
    if (int'(ns) != nexp)       begin errors++; $display("monitor: NSAMPLE %0d", ns); end
    if (fcs != crc)             begin errors++; $display("monitor: FCS %h expected %h", fcs, crc); end
    if (int'(pid) != pkt_expect) begin errors++; $display("monitor: PKTID %0d expected %0d", pid, pkt_expect); end
    if (have_ts && ts < prev_ts) ts_steps_bad++;
    prev_ts = ts; have_ts = 1; last_ts = ts;
    if (nexp != SPP) short_packets++;
    for (int i = 0; i < nexp; i++) begin
      logic [63:0] v = '0;
      for (int b = 0; b < 8; b++) v = {v[55:0], buff[30 + 8*i + b]};
      if (int'(pid) * SPP + i < NBINS) samples[int'(pid) * SPP + i] = v;
    end
    if (pid == 0) evtid = ev;
    else if (ev != evtid) begin errors++; $display("monitor: EVTID changed inside event"); end
    mode = md;
    pkt_expect = (int'(pid) == NPKT - 1) ? 0 : int'(pid) + 1;
    if (int'(pid) == NPKT - 1) begin
      events++;
      event_done <= 1'b1;
    end
  endtask

  always @(posedge clk) begin
    event_done <= 1'b0;
    if (tx_en) begin
      if (n < 2048) buff[n] = txd;
      n = n + 1;
    end else if (en_q) begin
      parse();
      n = 0;
    end
    en_q = tx_en;
  end
endmodule
