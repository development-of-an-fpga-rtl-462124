// daq_pkg -- constants, types and helper functions shared by the real-time
// spectrum DAQ firmware.
//
// The signal chain runs on the ADC clock (104.8576 MHz = 2^20 x 100 Hz): one
// acquisition frame is 2^20 ADC samples (10 ms), sub-sampled 1/64 to 2^14
// samples, Fourier transformed, and bins 0..5000 (DC..500 kHz above the
// 10.45 MHz LO) are shipped in 32 Ethernet packets of 160 samples. Those
// numbers follow the published design. Widths inside the chain, the FIR
// coefficients, the EtherType, the mode encoding and the configuration
// register map are choices of this implementation.
//
// FIR coefficients: a 64-tap equiripple (Parks-McClellan / Remez) low-pass for
// fs = 104.8576 MHz with pass band 0-3 MHz, stop band 8 MHz-fs/2 and stop-band
// weight 10, scaled so that the taps add up to 2^17 and rounded to integers.
// The quantised filter has 0.09 dB pass-band ripple and at least 65 dB
// stop-band attenuation. The filter is symmetric, so only the first 32 taps
// are listed; tap k and tap 63-k are equal.
package daq_pkg;

  // LO phase step: 10.45 MHz / 104.8576 MHz * 2^20 = 104500 exactly
  // (frame, FFT and packet sizes are parameters of daq_top, defaults there)
  localparam int unsigned LO_PHASE_INC = 104500;

  // ---------------------------------------------------------------- widths
  localparam int unsigned ADC_W   = 16;  // ADC DATA[15:0] bus (14-bit ADC)
  localparam int unsigned LO_W    = 16;  // CORDIC cosine/sine
  localparam int unsigned MIX_W   = 16;  // mixer output
  localparam int unsigned FIR_W   = 18;  // FIR output = FFT input
  localparam int unsigned COEF_W  = 18;  // FIR coefficients, Q1.17

  // --------------------------------------------------------- DAQ mode (SEL)
  typedef enum logic [1:0] {
    MODE_POWER   = 2'd0,  // re^2 + im^2, 64-bit unsigned
    MODE_VOLTAGE = 2'd1,  // sqrt(re^2 + im^2), zero-extended to 64 bit
    MODE_RAW     = 2'd2   // {re[31:0], im[31:0]}
  } daq_mode_e;

  // -------------------------------------------------- Ethernet constants
  localparam logic [15:0] DAQ_ETHERTYPE = 16'h88B5;       // IEEE local experimental
  localparam logic [39:0] DAQ_IDENT     = 40'h4341505000; // "CAPP\0"
  localparam logic [47:0] DEF_DEST_MAC  = 48'hFF_FF_FF_FF_FF_FF;
  localparam logic [47:0] DEF_SRC_MAC   = 48'h02_00_00_00_CA_FE;

  // configuration register addresses (8-bit address, 32-bit data)
  localparam logic [7:0] REG_MODE      = 8'h00;
  localparam logic [7:0] REG_DEST_HI   = 8'h01; // DEST MAC [47:32]
  localparam logic [7:0] REG_DEST_LO   = 8'h02; // DEST MAC [31:0]
  localparam logic [7:0] REG_SRC_HI    = 8'h03;
  localparam logic [7:0] REG_SRC_LO    = 8'h04;

  // ---------------------------------------------------------- FIR taps
  localparam int unsigned FIR_NTAPS = 64;
  typedef logic signed [COEF_W-1:0] coef_t;
  typedef coef_t coef_arr_t [FIR_NTAPS];
  localparam int FIR_HALF [32] = '{
      3,    77,   110,   176,   249,   324,   386,   422,
    414,   347,   209,    -5,  -290,  -631,  -999, -1355,
  -1649, -1824, -1823, -1597, -1103,  -320,   752,  2089,
   3638,  5326,  7058,  8730, 10232, 11463, 12336, 12790};

  function automatic coef_arr_t fir_taps();
    coef_arr_t t;
    for (int k = 0; k < 32; k++) begin
      t[k]      = coef_t'(FIR_HALF[k]);
      t[63 - k] = coef_t'(FIR_HALF[k]);
    end
    return t;
  endfunction

  // ------------------------------------------------------------ CRC-32
  // IEEE 802.3 CRC, reflected form (polynomial 0xEDB88320), one byte per call.
  function automatic logic [31:0] crc32_byte(input logic [31:0] crc, input logic [7:0] d);
    logic [31:0] c;
    c = crc ^ {24'd0, d};
    for (int i = 0; i < 8; i++)
      c = c[0] ? ((c >> 1) ^ 32'hEDB88320) : (c >> 1);
    return c;
  endfunction

  localparam logic [31:0] CRC_INIT    = 32'hFFFF_FFFF;
  localparam logic [31:0] CRC_RESIDUE = 32'hDEBB_20E3; // after data + FCS

endpackage
