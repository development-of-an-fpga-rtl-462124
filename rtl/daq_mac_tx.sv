// daq_mac_tx -- transmit MAC for the DAQ's custom layer-2 packets (GMII,
// one byte per 125 MHz clock).
//
// One spectrum (event) of NBINS samples is sent as NPKT packets: packets
// 0..NPKT-2 carry SPP samples each and the last one carries the rest (with
// the defaults 31 x 160 + 41 = 5001). Every packet, byte by byte:
//   PREAMBLE 7 x 0x55, SFD 0xD5,
//   DESTMAC (6), SRCMAC (6), TYPE (2)                       Ethernet header
//   EVTID (3), PKTID (1), TIMESTAMP (4)                     DAQ header
//   n x SAMPLE DATA (8 bytes each)                          DAQ data
//   IDENTIFIER 0x4341505000 (5), MODE (1), NSAMPLE (2)      DAQ trailer
//   FCS (4)                                                 Ethernet trailer
// followed by a 12-byte inter-packet gap. Field order and sizes, the
// identifier, the sample and packet counts and the meaning of EVTID, PKTID,
// TIMESTAMP and NSAMPLE follow the published packet format. Multi-byte
// fields go most significant byte first; the FCS is the IEEE 802.3 CRC-32
// sent least significant byte first. The EtherType, the byte order of the
// DAQ fields and the 12-byte gap are this implementation's choices.
//
// Interface: `start` (one clock) launches an event with `evt` and `mode`,
// both held stable by the source for the whole event. The MAC reads sample
// i of the event from a RAM with one clock of read latency (`re`, `raddr`,
// `rdata`). `busy` is high from `start` to the end of the last gap. A
// `start` while busy is ignored and counted in `overrun`.
//
// Timing: a packet of n samples occupies 30 + 8 n + 8 + 4 + 12 clocks; a
// full default event 42 688 clocks (0.34 ms) of the 10 ms frame.
module daq_mac_tx
  import daq_pkg::DAQ_ETHERTYPE, daq_pkg::DAQ_IDENT, daq_pkg::CRC_INIT, daq_pkg::crc32_byte;
#(
  parameter int unsigned NBINS = 5001,
  parameter int unsigned SPP   = 160,
  parameter int unsigned NPKT  = 32,
  parameter int unsigned EVT_W = 24,
  parameter int unsigned AW    = $clog2(NBINS)
) (
  input  logic             clk,
  input  logic             rst,
  input  logic             start,
  input  logic [EVT_W-1:0] evt,
  input  logic [1:0]       mode,
  input  logic [47:0]      dest_mac,
  input  logic [47:0]      src_mac,
  input  logic [31:0]      ts,
  output logic             re,
  output logic [AW-1:0]    raddr,
  input  logic [63:0]      rdata,
  output logic [7:0]       gmii_txd,
  output logic             gmii_tx_en,
  output logic             gmii_tx_er,
  output logic             busy,
  output logic [15:0]      overrun
);
  localparam int unsigned LAST_N = NBINS - (NPKT - 1) * SPP;
  localparam int unsigned PKT_W  = (NPKT > 1) ? $clog2(NPKT) : 1;
  localparam int unsigned POS_W  = $clog2(30 + 8 * SPP + 24 + 1);
  localparam int unsigned HDR0   = 8;                 // first header byte
  localparam int unsigned DAT0   = 30;                // first sample byte

  typedef enum logic [1:0] {S_IDLE, S_PKT} state_e;
  state_e            state;
  logic [PKT_W-1:0]  pkt;
  logic [POS_W-1:0]  pos;
  logic [AW-1:0]     base;
  logic [15:0]       nsamp;
  logic [31:0]       ts_q;
  logic [31:0]       crc;
  logic [175:0]      hdr;
  logic [63:0]       trl;
  logic [POS_W-1:0]  end_dat, end_trl, end_fcs, end_pkt;
  logic [7:0]        byte_c;
  logic              en_c;
  logic [POS_W-1:0]  nxt;
  logic [2:0]        dpos;   // byte inside a sample

  assign nsamp   = (pkt == PKT_W'(NPKT - 1)) ? 16'(LAST_N) : 16'(SPP);
  assign end_dat = POS_W'(DAT0) + POS_W'(nsamp) * POS_W'(8);
  assign end_trl = end_dat + POS_W'(8);
  assign end_fcs = end_trl + POS_W'(4);
  assign end_pkt = end_fcs + POS_W'(12);

  assign hdr = {dest_mac, src_mac, DAQ_ETHERTYPE, evt, 8'(pkt), ts_q};
  assign trl = {DAQ_IDENT, 8'(mode), nsamp};
  assign dpos = 3'(pos - POS_W'(DAT0));

  // byte on the wire at position `pos`
  always_comb begin
    byte_c = 8'h00;
    en_c   = 1'b0;
    if (state == S_PKT) begin
      if (pos < POS_W'(7)) begin
        byte_c = 8'h55; en_c = 1'b1;
      end else if (pos == POS_W'(7)) begin
        byte_c = 8'hD5; en_c = 1'b1;
      end else if (pos < POS_W'(DAT0)) begin
        byte_c = hdr[175 - 8 * (int'(pos) - HDR0) -: 8]; en_c = 1'b1;
      end else if (pos < end_dat) begin
        byte_c = rdata[63 - 8 * int'(dpos[2:0]) -: 8]; en_c = 1'b1;
      end else if (pos < end_trl) begin
        byte_c = trl[63 - 8 * int'(POS_W'(pos - end_dat)) -: 8]; en_c = 1'b1;
      end else if (pos < end_fcs) begin
        byte_c = ~crc[8 * int'(POS_W'(pos - end_trl)) +: 8]; en_c = 1'b1;
      end
    end
  end

  // sample read one clock ahead: address of the byte at pos + 1
  assign nxt   = pos + 1'b1 - POS_W'(DAT0);
  assign re    = (state == S_PKT);
  assign raddr = base + AW'(nxt >> 3);

  always_ff @(posedge clk) begin
    if (rst) begin
      state      <= S_IDLE;
      pkt        <= '0;
      pos        <= '0;
      base       <= '0;
      ts_q       <= '0;
      crc        <= CRC_INIT;
      gmii_txd   <= '0;
      gmii_tx_en <= 1'b0;
      overrun    <= '0;
    end else begin
      gmii_txd   <= byte_c;
      gmii_tx_en <= en_c;
      if (start && state != S_IDLE) overrun <= overrun + 1'b1;
      unique case (state)
        S_IDLE: if (start) begin
          state <= S_PKT;
          pkt   <= '0;
          pos   <= '0;
          base  <= '0;
          ts_q  <= ts;
        end
        S_PKT: begin
          if (pos == POS_W'(7))                      crc <= CRC_INIT;
          else if (pos >= POS_W'(HDR0) && pos < end_trl) crc <= crc32_byte(crc, byte_c);
          if (pos == end_pkt - 1'b1) begin
            pos  <= '0;
            ts_q <= ts;
            base <= base + AW'(SPP);
            if (pkt == PKT_W'(NPKT - 1)) state <= S_IDLE;
            else                         pkt   <= pkt + 1'b1;
          end else begin
            pos <= pos + 1'b1;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign gmii_tx_er = 1'b0;
  assign busy       = (state != S_IDLE);
endmodule
