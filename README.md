# Real-time zoom-FFT spectrum DAQ for an axion haloscope

A haloscope searches for a very narrow line of excess power, a few hundred
hertz wide, somewhere in a band of a few hundred kilohertz around an
intermediate frequency (IF). A spectrum analyser wastes most of its time.
An ADC feeding an offline FFT produces too much data. This FPGA design
instead computes the spectrum of the IF signal in real time and sends every
spectrum to a computer over Gigabit Ethernet. It has no dead time, so every
10 ms of signal becomes one spectrum and the computer only has to average.

The numbers that shape the design:

| quantity | value |
|---|---|
| ADC clock | 104.8576 MHz = 2^20 x 100 Hz |
| frame (one *event*) | 2^20 samples = 10 ms |
| analysis window | 10.45 - 10.95 MHz (IF 10.7 MHz +- 250 kHz) |
| resolution | 100 Hz per bin |
| bins sent per event | 5001 (0 ... 500 kHz above 10.45 MHz) |
| output | 32 Ethernet frames per event, 8 bytes per bin |

The SystemVerilog here implements the whole FPGA datapath. It starts at the
ADC sample bus and ends at the GMII byte stream to the Ethernet PCS/PMA. It
also includes the configuration path back from the network. The soft
processor, the system monitor, the PCS/PMA transceiver and the analog front
end are not part of it: the top module brings their connections out as
ports.

## The "zoom" FFT

A 2^20-point FFT of each frame would give 100 Hz bins directly, but would be
far too large. The window of interest is only 500 kHz wide, so the design
does this instead:

1. **Down-conversion.** Each sample is multiplied by a 10.45 MHz cosine,
   which moves 10.45-10.95 MHz to 0-500 kHz. The mixer is a single real
   multiply. The image of the product appears near 21 MHz.
2. **Low-pass filter.** A FIR filter passes 0-3 MHz and stops above 8 MHz,
   removing the image and everything that would alias.
3. **Decimation.** Every 64th filtered sample is kept, giving 16384 samples
   per frame at 1.6384 MHz. Its Nyquist frequency of 819.2 kHz is above the
   500 kHz window.
4. **FFT.** A 16384-point FFT of those samples still has 1.6384 MHz / 16384 =
   100 Hz bins. Bins 0...5000 are the window.

The LO is exact, not approximate. Its phase step is 104500 / 2^20 of a turn
per ADC clock, so 10.45 MHz is exactly bin 104500 of a 2^20-point
transform. A tone at 10.45 MHz + k x 100 Hz therefore lands exactly in bin k.

## Block by block

All modules live in `rtl/`, one per file. Shared constants, the mode enum,
the FIR taps and the CRC function are in `daq_pkg`.

### ADC clock domain (104.8576 MHz)

| module | what it does | latency |
|---|---|---|
| `sync_gen` | counts 0 ... 2^20-1. `sync` is high while the count is 0 (once per frame). The count is also the RAM write address. | - |
| `frame_counter` | counts sync pulses. The value is the event number (EVTID). Bit 0 selects the ping-pong RAM. | 1 |
| `offset_cancel` | adds up all samples of a frame. At `sync` it latches the sum >> 20 (the frame mean) as the offset for the next frame. Subtracts it and saturates. | 1 |
| `delay_line` | shift register that delays the samples by the 18-clock latency of the LO path, so that sample n meets LO sample n. | 18 |
| `phase_gen` | 20-bit phase accumulator, + 104500 per clock, cleared at `sync`. | 1 |
| `cordic` | 16-iteration pipelined rotation CORDIC. It folds the phase into the first quadrant, adds 4 guard bits and rounds. Output is cos and sin in Q1.15, within 2 LSB of ideal. | 18 |
| `mixer` | `round(x * cos / 2^15)`, saturated to 16 bits. | 2 |
| `fir_filter` | 64-tap symmetric equiripple low-pass in transposed form. Taps are 18-bit and add up to 2^17. Output is 18 bits. | 2 |
| `subsample_buffer` | two 16384 x 18 RAMs (`dp_ram`). Writes every 64th sample into the bank given by `bank`. After each sync it reads the other bank out in 16384 consecutive clocks, with a `start` flag on the first word. | 2 after sync |
| `fft_r2sdf` | 16384-point radix-2 DIF pipelined FFT built from 14 `fft_stage`s. It is unscaled, 18 bits in and 32 bits out, and its output is in bit-reversed order. | N-1+14 |
| `spectrum_calc` | re^2 + im^2 (64-bit), `isqrt` for the voltage, and an output MUX by mode. The mode is latched at the start of each spectrum. | 35 |

### Crossing to the Ethernet clock (125 MHz)

`spectrum_buffer` is one 5001 x 64-bit dual-clock RAM. The FFT writes bin
`bitrev(pos)` and drops the bins at 5001 and above, which both reorders the
bins and selects the window. The event number and mode are captured at the
start of a spectrum. They are published together with a toggle when the
last word of the spectrum is written. A three-flop synchroniser turns the
toggle into a `rdy` pulse in the 125 MHz domain.

One buffer is enough. Sending an event takes 0.34 ms, and the next spectrum
starts arriving about 10 ms later. This design does not double-buffer the
spectrum. If the MAC is still busy when `rdy` comes, it skips the event and
counts it in `overrun`, which stays at 0 in normal operation.

### The packet MAC (`daq_mac_tx`)

Each event becomes 32 Ethernet frames. Frames 0-30 carry 160 bins each and
frame 31 carries the last 41 (31 x 160 + 41 = 5001). The bytes on GMII:

```
offset  size  field
0       7     preamble 0x55
7       1     SFD 0xD5
8       6     destination MAC          (register, default broadcast)
14      6     source MAC               (register, default 02:00:00:00:CA:FE)
20      2     EtherType 0x88B5
22      3     EVTID     event number
25      1     PKTID     0..31
26      4     TIMESTAMP 10 us ticks since reset
30      8n    n samples, 8 bytes each, bin order
30+8n   5     identifier 0x43 0x41 0x50 0x50 0x00 ("CAPP\0")
35+8n   1     MODE      0 power, 1 voltage, 2 raw
36+8n   2     NSAMPLE   n (160, or 41 in the last frame)
38+8n   4     FCS       CRC-32 over bytes 8 .. 37+8n
then 12 idle clocks
```

All DAQ fields and samples are sent most significant byte first. The FCS is
the standard Ethernet CRC, sent least significant byte first. The sample
word depends on the mode:

* power: re^2 + im^2 as an unsigned 64-bit number;
* voltage: floor(sqrt(power)) in the low 32 bits;
* raw: {re, im}, each a signed 32-bit FFT output.

The MAC reads the spectrum RAM one byte-clock ahead of the wire, so each
sample is on `rdata` when its first byte is due. The timestamp is sampled at
the start of every frame. A full event takes 42,688 clocks, which is 3.4 %
of the link.

### Configuration (`mac_rx_config`, `global_config`)

The DAQ computer configures the design with ordinary Ethernet frames of
EtherType 0x88B5 on the receive side. After the 14-byte header, byte 14 is a
register address and bytes 15-18 a 32-bit value (big-endian). The frame must
hold at least these 19 bytes plus the FCS; the destination address is not
checked, since the link is a direct cable. A frame is accepted only if:

* its FCS is correct;
* its type matches;
* `rx_er` was never raised.

Any other frame is counted in `dropped`. The processor side (`cpu_we`,
`cpu_addr`, `cpu_wdata`, `cpu_rdata`) writes the same registers. It wins if
both write in the same clock.

| addr | register |
|---|---|
| 0 | mode (0 power, 1 voltage, 2 raw; 3 ignored) |
| 1 / 2 | destination MAC [47:32] / [31:0] |
| 3 / 4 | source MAC [47:32] / [31:0] |

The mode crosses into the ADC domain through a two-flop synchroniser. It
takes effect at the next spectrum boundary, so no spectrum ever mixes modes.

### System clock

`clk_div30` divides the 300 MHz system clock by 30. The result is the 10 MHz
clock of the on-chip system monitor, brought out as `sysmon_clk`.

## Fixed-point choices and accuracy

* **CORDIC.** Errors are at most 2 LSB of 32767. The LO spur this causes
  lies far below the FIR's 65 dB stop band.
* **FIR.** The quantised filter has 0.09 dB pass-band ripple (0-3 MHz) and at
  least 65 dB attenuation from 8 MHz. The test measures -0.07 dB at 1 MHz and
  -65.7 dB at 21.15 MHz. Its DC gain is 1. The taps come from a Parks-McClellan
  design (64 taps, stop-band weight 10), scaled to add up to 2^17 and rounded.
  The first 32 are listed in `daq_pkg`; the rest mirror them.
* **FFT.** The FFT never scales, so no stage can overflow. Each stage adds a
  bit, and the words grow from 18 to 32 bits. Twiddles are 18-bit with 16
  fraction bits, and each product is rounded once. This is accurate for any
  input whose complex magnitude is below 2^17, which always holds for the
  real 18-bit input here. The test transform agrees with a floating-point DFT
  to within 7.5 LSB.
* **Offset.** The offset is the mean of the previous whole frame. The first
  frame after reset is processed with offset 0. The DC bin of any spectrum
  should not be trusted, because it still carries what is left of the
  offset.

## Clocks, resets and timing

There are three clock domains: `adc_clk`, `gt_clk` and `sys_clk`. Each has
its own synchronous, active-high reset. Only two signals cross between the
ADC and GT domains:

* the spectrum handshake (toggle plus synchroniser, with a dual-clock RAM);
* the mode (two-flop synchroniser).

A spectrum of frame k is in the buffer about 16384 + 100 ADC clocks after
frame k ends. This is the read-out burst plus the FFT and power latency. The
MAC then starts within a few GT clocks. The first spectrum after reset
belongs to the first complete frame.

## Top-level ports (`daq_top`)

* `adc_clk`, `adc_rst`, `adc_data[15:0]`: ADC bus, two's complement.
* `gt_clk`, `gt_rst`, `gmii_txd/tx_en/tx_er`, `gmii_rxd/rx_dv/rx_er`: GMII
  to the PCS/PMA.
* `cpu_we/addr/wdata/rdata`: register port for the processor.
* `sys_clk`, `sys_rst`, `sysmon_clk`.
* Status outputs: `frame_sync`, `adc_offset`, `frame_evt`, `mac_busy`,
  `mac_overrun`, `cfg_dropped`.

The parameters are `LOG2N`, `DECIM_LOG2`, `PHASE_INC`, `NBINS`, `SPP`,
`NPKT`, `TS_DIV` and `SYS_DIV`. Their defaults are the full-size design.
The frame length is 2^(LOG2N+DECIM_LOG2), so a smaller FFT also gives a
shorter frame. That is how the reduced end-to-end test runs quickly.

## Where this differs from, or goes beyond, the original design

* The original firmware used vendor IP for the CORDIC, the FIR and the FFT.
  Here all three are written out. Their widths, latencies and the tap count
  are this design's own. The FFT has the same architecture (radix-2 DIF,
  pipelined streaming), but it is unscaled and emits bit-reversed order, and
  the spectrum buffer does the reordering.
* The original describes only the function of several blocks. This design
  supplies its own versions of:
  * the offset method (mean of the previous frame);
  * how the 1/64 sub-sampling is done (it keeps every 64th sample);
  * the shift register's purpose (aligning the data with the LO);
  * the clock-domain crossing;
  * the mode encoding;
  * the byte order;
  * the EtherType;
  * the configuration frame format and register map.
* The block diagram shows "environment data" flowing from the system monitor
  into the MAC. Its format is not described and the data packets have no
  field for it, so it is not implemented.
* The processor, the system monitor, the PCS/PMA, the ADC and the analog IF
  chain are not modelled.

## Verification

Every module has a self-checking testbench in `tb/`. Each one prints
`TB_RESULT checks=<n> failures=<m>` and has a watchdog. References are
computed independently inside the testbench:

* a floating-point DFT for the FFT;
* a direct convolution for the FIR;
* a bitwise CRC in `gmii_monitor`, which decodes and checks every GMII frame.

The end-to-end tests:

* **`tb_daq_top`** runs at reduced size: a 64-point FFT, 1/16 decimation,
  1024-sample frames, and 20 bins in 3 frames of up to 8. The ADC model
  produces a tone exactly on bin 5 plus a DC offset and noise. The test
  checks the peak bin, the offset estimate, the EVTID sequence, the packet
  format and FCS, and the timestamps. It also exercises each control path:
  * a bad-FCS configuration frame is dropped;
  * a good one switches to voltage mode, where voltage^2 must match the
    earlier power;
  * a processor write switches to raw mode, where |re + j im| must match the
    voltage.

  It counts frame syncs, the use of both RAM banks, FFT runs, each mode, the
  short last packet and the system-monitor clock. Any of them that never
  happens counts as a failure.
* **`tb_daq_top_full`** runs the design with all defaults: 2^20-sample
  frames, a 16384-point FFT, and 5001 bins in 32 frames. A tone at
  10.45 MHz + 123.4 kHz must appear in bin 1234, more than 40 dB above every
  other bin. The test checks three events, a processor switch from power to
  voltage mode, NSAMPLE 160/41, the frame period, the offset estimate and
  the packet format. It takes about 10 seconds in Verilator.

* **`tb_freq_sweep`** repeats the frequency-reconstruction measurement. The
  design keeps the real 1/64 decimation and FIR but uses a 256-point FFT,
  whose 79-bin window is the same fraction of the FFT as 5001 of 16384. Frame
  by frame, the test steps a tone through every bin of the window. Each bin
  must be the peak exactly once, in order. The peak power of bins 1-78 must
  agree within 0.3 dB; the measured spread is 0.03 dB.

  Bin 0 behaves differently. A tone exactly at the LO frequency mixes down to
  DC instead of to a positive and a negative frequency. Its power is
  4 cos^2(phi) times that of the other bins, where phi is the tone's phase
  against the LO, so it can be up to 6 dB high (4.1 dB in this test). The
  lowest bin of a real measurement should therefore be treated with care.

To run a test with Verilator, for example the full-size one:

```
verilator --binary --timing rtl/daq_pkg.sv tb/tb_daq_top_full.sv \
          -y rtl -y tb --top-module tb_daq_top_full
./obj_dir/Vtb_daq_top_full
```

The design is synthesizable as written. Memories are inferred arrays and the
twiddle tables are computed at elaboration, one constant per entry from
$cos/$sin, so no table files are needed.
