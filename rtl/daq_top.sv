// daq_top -- FPGA firmware of the real-time zoom-FFT spectrum DAQ.
//
// ADC clock domain (104.8576 MHz): the 14-bit ADC samples (on a 16-bit bus)
// have their DC offset removed, are delayed to meet the LO, multiplied by a
// 10.45 MHz cosine from a phase accumulator and CORDIC, low-pass filtered
// (FIR, pass band to 3 MHz), and every 64th sample is written into one of two
// ping-pong RAMs. Every 2^20 clocks (10 ms, the internal sync) the RAM just
// filled streams its 16384 samples into the 16384-point pipelined FFT while
// the other RAM records the next frame. Each bin is converted to power,
// voltage or raw (re, im) per the DAQ mode and the lower 5001 bins
// (10.45-10.95 MHz in 100 Hz steps) are put into the spectrum buffer.
// GT clock domain (125 MHz): the MAC sends each spectrum as 32 packets on
// GMII (to the external PCS/PMA), stamped with the event number, packet
// number and a 10 us timestamp; configuration frames from the DAQ computer
// and register writes from the processor port set the mode and addresses.
// System clock domain (300 MHz): a divide-by-30 clock for the system
// monitor. Processor core, system monitor and PCS/PMA are outside this RTL;
// their connections are ports.
//
// The block structure follows the published firmware block diagram;
// interface widths not given there, the pipeline alignment and the
// configuration register map are this implementation's choices.
//
// Parameters: LOG2N (FFT size), DECIM_LOG2 (sub-sampling), so that a frame
// is 2^(LOG2N+DECIM_LOG2) ADC samples; PHASE_INC (LO step per sample in
// units of 2^-(LOG2N+DECIM_LOG2) turns, i.e. in FFT bins); NBINS, SPP and
// NPKT (bins kept, samples per packet, packets per event); TS_DIV (GT clocks
// per timestamp tick); SYS_DIV (system monitor clock divider).
//
// Timing: a spectrum of frame k leaves the FFT about 2^LOG2N + 100 clocks
// after the end of frame k; the MAC starts a few GT clocks later.
//
// Left unused on purpose: the CORDIC's sine output (the published mixer is a
// single real multiplication by the cosine), the sub-sample buffer's
// first_block flag (a status flag for test benches; the first spectrum after
// reset is sent like any other), and gmii_tx_er, which the MAC holds at 0.
module daq_top
  import daq_pkg::*;
#(
  parameter int unsigned LOG2N      = 14,
  parameter int unsigned DECIM_LOG2 = 6,
  parameter int unsigned PHASE_INC  = LO_PHASE_INC,
  parameter int unsigned NBINS      = 5001,
  parameter int unsigned SPP        = 160,
  parameter int unsigned NPKT       = 32,
  parameter int unsigned TS_DIV     = 1250,
  parameter int unsigned SYS_DIV    = 30
) (
  // ADC
  input  logic                     adc_clk,
  input  logic                     adc_rst,
  input  logic signed [ADC_W-1:0]  adc_data,
  // GT reference clock domain: GMII to/from PCS/PMA
  input  logic                     gt_clk,
  input  logic                     gt_rst,
  output logic [7:0]               gmii_txd,
  output logic                     gmii_tx_en,
  output logic                     gmii_tx_er,
  input  logic [7:0]               gmii_rxd,
  input  logic                     gmii_rx_dv,
  input  logic                     gmii_rx_er,
  // processor core register port (GT clock domain)
  input  logic                     cpu_we,
  input  logic [7:0]               cpu_addr,
  input  logic [31:0]              cpu_wdata,
  output logic [31:0]              cpu_rdata,
  // system clock and system monitor clock
  input  logic                     sys_clk,
  input  logic                     sys_rst,
  output logic                     sysmon_clk,
  // status
  output logic                     frame_sync,
  output logic signed [ADC_W-1:0]  adc_offset,
  output logic [23:0]              frame_evt,
  output logic                     mac_busy,
  output logic [15:0]              mac_overrun,
  output logic [15:0]              cfg_dropped
);
  localparam int unsigned FRAME_LOG2 = LOG2N + DECIM_LOG2;
  localparam int unsigned CORDIC_IT  = 16;
  localparam int unsigned CORDIC_LAT = CORDIC_IT + 2;
  localparam int unsigned FFT_OW     = FIR_W + LOG2N;
  localparam int unsigned AW         = $clog2(NBINS);

  // ----------------------------------------------------------- ADC domain
  logic [FRAME_LOG2-1:0]      idx;
  logic                       sync;
  logic [23:0]                evt;
  logic                       bank;
  logic signed [ADC_W-1:0]    dc_free, dc_off, dly;
  logic [FRAME_LOG2-1:0]      phase;
  logic signed [LO_W-1:0]     lo_cos, lo_sin;
  logic signed [MIX_W-1:0]    mixed;
  logic signed [FIR_W-1:0]    filt;
  logic signed [FIR_W-1:0]    ss_data;
  logic                       ss_valid, ss_start;
  logic signed [FIR_W-1:0]    fft_in;
  logic signed [FFT_OW-1:0]   fft_re, fft_im;
  logic                       fft_start, fft_valid;
  logic [LOG2N-1:0]           fft_pos;
  logic [63:0]                sp_data;
  logic                       sp_valid, sp_start;
  logic [LOG2N-1:0]           sp_pos;
  daq_mode_e                  sp_mode;
  logic [1:0]                 mode_adc;
  logic [23:0]                evt_fft;

  sync_gen #(.CNT_W(FRAME_LOG2)) u_sync (
    .clk(adc_clk), .rst(adc_rst), .idx(idx), .sync(sync));

  frame_counter #(.EVT_W(24)) u_frames (
    .clk(adc_clk), .rst(adc_rst), .sync(sync), .evt(evt), .bank(bank));

  offset_cancel #(.DATA_W(ADC_W), .AVG_LOG2(FRAME_LOG2)) u_offset (
    .clk(adc_clk), .rst(adc_rst), .sync(sync), .din(adc_data),
    .dout(dc_free), .offset(dc_off));

  // ADC sample of index n leaves offset_cancel at idx = n+1; the LO sample
  // for n leaves the CORDIC at idx = n + 1 + CORDIC_LAT
  delay_line #(.WIDTH(ADC_W), .DEPTH(CORDIC_LAT)) u_shift (
    .clk(adc_clk), .rst(adc_rst), .din(dc_free), .dout(dly));

  phase_gen #(.PHASE_W(FRAME_LOG2), .PHASE_INC(PHASE_INC)) u_phase (
    .clk(adc_clk), .rst(adc_rst), .sync(sync), .phase(phase));

  cordic #(.PHASE_W(FRAME_LOG2), .OUT_W(LO_W), .ITER(CORDIC_IT)) u_lo (
    .clk(adc_clk), .phase(phase), .cos_o(lo_cos), .sin_o(lo_sin));

  mixer #(.IN_W(ADC_W), .LO_W(LO_W), .OUT_W(MIX_W)) u_mix (
    .clk(adc_clk), .din(dly), .lo(lo_cos), .dout(mixed));

  fir_filter #(.IN_W(MIX_W), .OUT_W(FIR_W)) u_fir (
    .clk(adc_clk), .rst(adc_rst), .din(mixed), .dout(filt));

  subsample_buffer #(.WIDTH(FIR_W), .LOG2N(LOG2N), .DECIM_LOG2(DECIM_LOG2)) u_ssb (
    .clk(adc_clk), .rst(adc_rst), .sync(sync), .idx(idx), .bank(bank),
    .din(filt), .dout(ss_data), .valid(ss_valid), .start(ss_start),
    .first_block());

  // zeros between blocks flush the FFT pipeline
  assign fft_in = ss_valid ? ss_data : '0;

  fft_r2sdf #(.IN_W(FIR_W), .LOG2N(LOG2N)) u_fft (
    .clk(adc_clk), .rst(adc_rst), .in_re(fft_in), .in_im('0),
    .in_start(ss_start), .out_re(fft_re), .out_im(fft_im),
    .out_start(fft_start), .out_valid(fft_valid), .out_pos(fft_pos));

  // event number of the frame now being transformed (recorded one frame ago)
  always_ff @(posedge adc_clk) begin
    if (adc_rst)       evt_fft <= '0;
    else if (ss_start) evt_fft <= evt - 1'b1;
  end

  spectrum_calc #(.IN_W(FFT_OW), .POS_W(LOG2N)) u_spec (
    .clk(adc_clk), .rst(adc_rst), .mode(daq_mode_e'(mode_adc)),
    .in_re(fft_re), .in_im(fft_im), .in_valid(fft_valid),
    .in_start(fft_start), .in_pos(fft_pos),
    .out_data(sp_data), .out_valid(sp_valid), .out_start(sp_start),
    .out_pos(sp_pos), .out_mode(sp_mode));

  // ------------------------------------------------------------ GT domain
  logic             rdy;
  logic [23:0]      buf_evt;
  logic [1:0]       buf_mode;
  logic             mac_re;
  logic [AW-1:0]    mac_raddr;
  logic [63:0]      mac_rdata;
  logic [31:0]      ts;
  logic             net_we;
  logic [7:0]       net_addr;
  logic [31:0]      net_wdata;
  daq_mode_e        mode_gt;
  logic [47:0]      dest_mac, src_mac;

  spectrum_buffer #(.WIDTH(64), .LOG2N(LOG2N), .NBINS(NBINS), .EVT_W(24), .AW(AW)) u_sbuf (
    .wclk(adc_clk), .wrst(adc_rst), .wdata(sp_data), .wvalid(sp_valid),
    .wstart(sp_start), .wpos(sp_pos), .wevt(evt_fft), .wmode(sp_mode),
    .rclk(gt_clk), .rrst(gt_rst), .re(mac_re), .raddr(mac_raddr),
    .rdata(mac_rdata), .rdy(rdy), .evt(buf_evt), .mode(buf_mode));

  timestamp_counter #(.DIV(TS_DIV), .TS_W(32)) u_ts (
    .clk(gt_clk), .rst(gt_rst), .ts(ts));

  daq_mac_tx #(.NBINS(NBINS), .SPP(SPP), .NPKT(NPKT), .EVT_W(24), .AW(AW)) u_mac_tx (
    .clk(gt_clk), .rst(gt_rst), .start(rdy), .evt(buf_evt), .mode(buf_mode),
    .dest_mac(dest_mac), .src_mac(src_mac), .ts(ts),
    .re(mac_re), .raddr(mac_raddr), .rdata(mac_rdata),
    .gmii_txd(gmii_txd), .gmii_tx_en(gmii_tx_en), .gmii_tx_er(gmii_tx_er),
    .busy(mac_busy), .overrun(mac_overrun));

  mac_rx_config u_mac_rx (
    .clk(gt_clk), .rst(gt_rst), .gmii_rxd(gmii_rxd), .gmii_rx_dv(gmii_rx_dv),
    .gmii_rx_er(gmii_rx_er), .we(net_we), .addr(net_addr), .wdata(net_wdata),
    .dropped(cfg_dropped));

  global_config u_cfg (
    .clk(gt_clk), .rst(gt_rst),
    .net_we(net_we), .net_addr(net_addr), .net_wdata(net_wdata),
    .cpu_we(cpu_we), .cpu_addr(cpu_addr), .cpu_wdata(cpu_wdata),
    .cpu_rdata(cpu_rdata), .mode(mode_gt), .dest_mac(dest_mac), .src_mac(src_mac));

  // DAQ mode into the ADC domain (quasi-static)
  sync_ff #(.WIDTH(2)) u_mode_sync (
    .clk(adc_clk), .rst(adc_rst), .d(mode_gt), .q(mode_adc));

  // -------------------------------------------------------- system clock
  clk_div30 #(.DIV(SYS_DIV)) u_div (
    .clk(sys_clk), .rst(sys_rst), .clk_out(sysmon_clk));

  assign frame_sync = sync;
  assign frame_evt  = evt;
  assign adc_offset = dc_off;
endmodule
