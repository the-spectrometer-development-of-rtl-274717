// spec_pkg: constants shared by the spectrometer blocks.
//
// The sample clock is 256 MHz and the converters run at 2048 MSPS, so every
// converter bus carries LANES = 8 samples per clock. The ADC is 12 bits, the
// DAC 14 bits, the channelizer is a 4096-point FFT behind a 20-tap-per-branch
// polyphase filter bank (81920 coefficients), giving 62.5 kHz bins after the
// decimate-by-8 stage (256 MSPS / 4096). The output stream is 32 bits wide.
// These numbers are the paper's. LPF_COEF is this design's own choice: a
// 128-tap Kaiser-windowed sinc (beta = 5), cutoff at 1/16 of the fast rate,
//   h[n] = w[n] * sin(2*pi*m/16)/(pi*m),  m = n - 63.5,
//   w[n] = I0(5*sqrt(1 - (2n/127 - 1)^2)) / I0(5),
// rounded to Q15 and normalised to a DC gain of exactly 32768. It is flat
// within 0.03 dB up to 100 MHz (the top of the science band) and at least
// 54 dB down from 156 MHz, the lowest frequency that folds back onto
// 100 MHz after decimation by 8 (and the lowest image of a 100 MHz tone
// after interpolation by 8). It serves both the decimator and the
// interpolator. The table is symmetric; LPF_HALF holds taps 0..63.
package spec_pkg;
  localparam int unsigned CLK_MHZ       = 256;
  localparam int unsigned FS_MSPS       = 2048;
  localparam int unsigned LANES         = FS_MSPS / CLK_MHZ;   // 8
  localparam int unsigned ADC_W         = 12;
  localparam int unsigned DAC_W         = 14;
  localparam int unsigned FFT_N         = 4096;
  localparam int unsigned PFB_TAPS      = 20;                  // 81920 / 4096
  localparam int unsigned AXIS_W        = 32;

  localparam int unsigned LPF_TAPS      = 128;
  localparam int unsigned LPF_FRAC      = 15;
  typedef logic signed [15:0] lpf_table_t [LPF_TAPS];
  localparam int LPF_HALF [LPF_TAPS/2] = '{
       -1,    -4,    -7,   -10,   -12,   -12,    -9,    -4,
        4,    14,    23,    30,    34,    32,    23,     9,
      -10,   -31,   -51,   -66,   -72,   -66,   -48,   -18,
       20,    61,    99,   126,   136,   124,    89,    34,
      -36,  -110,  -177,  -224,  -240,  -218,  -156,   -59,
       63,   193,   310,   393,   423,   387,   279,   106,
     -115,  -355,  -581,  -751,  -827,  -777,  -581,  -230,
      263,   871,  1552,  2250,  2905,  3459,  3861,  4069
  };

  function automatic lpf_table_t lpf_mirror();
    lpf_table_t t;
    for (int k = 0; k < int'(LPF_TAPS) / 2; k++) begin
      t[k]                    = 16'(LPF_HALF[k]);
      t[int'(LPF_TAPS) - 1 - k] = 16'(LPF_HALF[k]);
    end
    return t;
  endfunction

  localparam lpf_table_t LPF_COEF = lpf_mirror();

  // Register map of ctrl_regs (byte addresses on the AXI4-Lite bus).
  localparam logic [7:0] REG_CTRL      = 8'h00; // [0] run [1] cal_mode [2] adc_nco_en [3] dac_nco_en [4] clear (self-clearing)
  localparam logic [7:0] REG_NAVG      = 8'h04; // frames per integration
  localparam logic [7:0] REG_DMA_BASE  = 8'h08; // ring buffer byte address
  localparam logic [7:0] REG_DMA_LEN   = 8'h0C; // ring buffer length in 32-bit words
  localparam logic [7:0] REG_ADC_FTW   = 8'h10; // receive NCO phase step per 2048 MSPS sample
  localparam logic [7:0] REG_DAC_FTW   = 8'h14; // transmit NCO phase step
  localparam logic [7:0] REG_PM_WIN    = 8'h18; // power meter window in clocks
  localparam logic [7:0] REG_LUT_LEN   = 8'h1C; // waveform pattern length
  localparam logic [7:0] REG_LUT_ADDR  = 8'h20; // waveform write address
  localparam logic [7:0] REG_LUT_DATA  = 8'h24; // waveform write data (write strobes the table)
  localparam logic [7:0] REG_STATUS    = 8'h30; // RO [0] spectrum overflow (sticky) [1] DMA error (sticky)
  localparam logic [7:0] REG_SPECTRA   = 8'h34; // RO integrations completed
  localparam logic [7:0] REG_DMA_FRM   = 8'h38; // RO frames written to memory
  localparam logic [7:0] REG_PM_INC_L  = 8'h3C; // RO incident power, low word
  localparam logic [7:0] REG_PM_INC_H  = 8'h40;
  localparam logic [7:0] REG_PM_REF_L  = 8'h44; // RO reflected power, low word
  localparam logic [7:0] REG_PM_REF_H  = 8'h48;
  localparam logic [7:0] REG_PM_CNT    = 8'h4C; // RO power measurements completed

  function automatic logic signed [31:0] sat32(input logic signed [63:0] v, input int unsigned w);
    logic signed [63:0] mx, mn;
    mx = (64'sd1 <<< (w - 1)) - 1;
    mn = -(64'sd1 <<< (w - 1));
    if (v > mx) return 32'(mx);
    if (v < mn) return 32'(mn);
    return 32'(v);
  endfunction
endpackage
