// cosmocube_spectrometer: programmable-logic part of the CosmoCube
// radiometer back end on an RFSoC.
//
// Receive chain (always running): the spectrum ADC delivers 2048 MSPS as
// 8 x 12-bit samples per 256 MHz clock -> nco_mixer (bypassed unless
// enabled) -> decimator (/8, 256 MSPS) -> pfb_fir (4096 branches x 20 taps)
// -> fft_r2sdf (4096 points) -> bram_fifo -> frame_conv (power, integration
// over navg frames, 2048 bins of 62.5 kHz as 4096 32-bit words per spectrum)
// -> axis_dma -> AXI4 writes into a ring buffer in DDR4.
//
// Calibration mode (cal_mode set in ctrl_regs) additionally runs the two
// coupler ADCs into power_meter instances (incident, reflected) and drives
// the DAC: wave_lut (256 MSPS pattern) -> interpolator (x8) -> nco_mixer ->
// 8 x 14-bit samples per clock. The waveform plays whenever cal_mode is
// set; the power meters measure while cal_mode and run are both set. In
// detection mode the DAC bus is zero and dac_valid low, and the power
// meters are idle. cal_mode_o is brought out
// for the front-end switch that selects antenna or calibrator.
//
// The processing system configures everything over AXI4-Lite (register map
// in spec_pkg). The converters, DDR4 and the processor are outside this
// module: their buses are its ports.
//
// The chain, the block order, the 2048 MSPS / 256 MHz rates, the 4096-point
// FFT with 81920 PFB coefficients, the 32-bit stream and the two modes are
// the paper's; widths, filters, register map and handshakes are this
// design's choices (see each block).
module cosmocube_spectrometer
  import spec_pkg::*;
#(
  parameter int unsigned FFT_LEN  = spec_pkg::FFT_N,
  parameter int unsigned TAPS     = spec_pkg::PFB_TAPS,
  parameter int unsigned FIFO_DEP = 4096,
  parameter int unsigned LUT_DEP  = 4096
) (
  input  logic                      clk,
  input  logic                      rst_n,
  // RF-ADC sample streams, 8 samples per clock each
  input  logic                      adc_valid,
  input  logic signed [ADC_W-1:0]   adc_spec [LANES],   // spectrum ADC
  input  logic signed [ADC_W-1:0]   adc_inc  [LANES],   // incident-wave coupler ADC
  input  logic signed [ADC_W-1:0]   adc_ref  [LANES],   // reflected-wave coupler ADC
  // RF-DAC sample stream
  output logic                      dac_valid,
  output logic signed [DAC_W-1:0]   dac_data [LANES],
  output logic                      cal_mode_o,
  // AXI4-Lite slave (from the processing system)
  input  logic [7:0]                s_awaddr,
  input  logic                      s_awvalid,
  output logic                      s_awready,
  input  logic [31:0]               s_wdata,
  input  logic                      s_wvalid,
  output logic                      s_wready,
  output logic [1:0]                s_bresp,
  output logic                      s_bvalid,
  input  logic                      s_bready,
  input  logic [7:0]                s_araddr,
  input  logic                      s_arvalid,
  output logic                      s_arready,
  output logic [31:0]               s_rdata,
  output logic [1:0]                s_rresp,
  output logic                      s_rvalid,
  input  logic                      s_rready,
  // AXI4 write master (to DDR4)
  output logic [31:0]               m_awaddr,
  output logic [7:0]                m_awlen,
  output logic [2:0]                m_awsize,
  output logic [1:0]                m_awburst,
  output logic                      m_awvalid,
  input  logic                      m_awready,
  output logic [31:0]               m_wdata,
  output logic [3:0]                m_wstrb,
  output logic                      m_wlast,
  output logic                      m_wvalid,
  input  logic                      m_wready,
  input  logic [1:0]                m_bresp,
  input  logic                      m_bvalid,
  output logic                      m_bready
);
  localparam int unsigned BW = $clog2(FFT_LEN);

  // ---------------- control ----------------
  logic        run, cal_mode, adc_nco_en, dac_nco_en, clear;
  logic [15:0] navg;
  logic [31:0] dma_base, dma_len, adc_ftw, dac_ftw, pm_window;
  logic [12:0] lut_len;
  logic        lut_wr;
  logic [11:0] lut_addr;
  logic [13:0] lut_data;
  logic        spec_overflow, spec_done, dma_error, pm_done_inc, pm_done_ref;
  logic [31:0] dma_frames, dma_words;
  logic [63:0] pm_inc, pm_ref;

  ctrl_regs u_regs (
    .clk, .rst_n,
    .s_awaddr, .s_awvalid, .s_awready, .s_wdata, .s_wvalid, .s_wready,
    .s_bresp, .s_bvalid, .s_bready, .s_araddr, .s_arvalid, .s_arready,
    .s_rdata, .s_rresp, .s_rvalid, .s_rready,
    .run, .cal_mode, .adc_nco_en, .dac_nco_en, .clear, .navg,
    .dma_base, .dma_len, .adc_ftw, .dac_ftw, .pm_window, .lut_len,
    .lut_wr, .lut_addr, .lut_data,
    .spec_overflow, .spec_done, .dma_error, .dma_frames,
    .pm_inc, .pm_ref, .pm_done(pm_done_inc)
  );
  assign cal_mode_o = cal_mode;

  // ---------------- receive chain ----------------
  logic                    mix_v, dec_v, pfb_v, pfb_first, fft_v, fft_last;
  logic signed [ADC_W-1:0] mix_d [LANES];
  logic signed [15:0]      dec_d;
  logic signed [17:0]      pfb_d;
  logic signed [31:0]      fft_re, fft_im;
  logic [BW-1:0]           fft_bin;

  nco_mixer #(.W(ADC_W)) u_rx_nco (
    .clk, .rst_n, .en(adc_nco_en), .ftw(adc_ftw),
    .in_valid(adc_valid), .in_data(adc_spec), .out_valid(mix_v), .out_data(mix_d)
  );

  decimator u_dec (
    .clk, .rst_n, .in_valid(mix_v), .in_data(mix_d), .out_valid(dec_v), .out_data(dec_d)
  );

  pfb_fir #(.P(FFT_LEN), .TAPS(TAPS)) u_pfb (
    .clk, .rst_n, .in_valid(dec_v), .in_data(dec_d),
    .out_valid(pfb_v), .out_first(pfb_first), .out_data(pfb_d)
  );

  fft_r2sdf #(.N(FFT_LEN)) u_fft (
    .clk, .rst_n, .in_valid(pfb_v), .in_re(pfb_d), .in_im('0),
    .out_valid(fft_v), .out_re(fft_re), .out_im(fft_im), .out_bin(fft_bin), .out_last(fft_last)
  );

  logic [BW+63:0] fifo_out;
  logic           fifo_empty, fifo_full, fifo_ovf;
  logic [$clog2(FIFO_DEP):0] fifo_count;

  bram_fifo #(.WIDTH(BW + 64), .DEPTH(FIFO_DEP)) u_fifo (
    .clk, .rst_n, .push(fft_v), .in_data({fft_bin, fft_re, fft_im}),
    .pop(!fifo_empty), .out_data(fifo_out), .empty(fifo_empty), .full(fifo_full),
    .count(fifo_count), .overflow(fifo_ovf)
  );

  logic [31:0] sp_tdata;
  logic        sp_tlast, sp_tvalid, sp_tready;

  frame_conv #(.N(FFT_LEN)) u_frame (
    .clk, .rst_n, .run, .navg,
    .in_valid(!fifo_empty), .in_re(fifo_out[63:32]), .in_im(fifo_out[31:0]),
    .in_bin(fifo_out[BW+63:64]),
    .m_tdata(sp_tdata), .m_tlast(sp_tlast), .m_tvalid(sp_tvalid), .m_tready(sp_tready),
    .spectrum_done(spec_done), .overflow(spec_overflow)
  );

  axis_dma u_dma (
    .clk, .rst_n, .en(1'b1), .clear, .base(dma_base), .len(dma_len),
    .s_tdata(sp_tdata), .s_tlast(sp_tlast), .s_tvalid(sp_tvalid), .s_tready(sp_tready),
    .m_awaddr, .m_awlen, .m_awsize, .m_awburst, .m_awvalid, .m_awready,
    .m_wdata, .m_wstrb, .m_wlast, .m_wvalid, .m_wready, .m_bresp, .m_bvalid, .m_bready,
    .frames(dma_frames), .words(dma_words), .error(dma_error)
  );

  // ---------------- calibration: coupler power ----------------
  logic cal_run;
  assign cal_run = cal_mode && run;

  power_meter u_pm_inc (
    .clk, .rst_n, .en(cal_run), .window(pm_window), .in_valid(adc_valid), .in_data(adc_inc),
    .power(pm_inc), .done(pm_done_inc)
  );
  power_meter u_pm_ref (
    .clk, .rst_n, .en(cal_run), .window(pm_window), .in_valid(adc_valid), .in_data(adc_ref),
    .power(pm_ref), .done(pm_done_ref)
  );

  // ---------------- calibration: DAC waveform ----------------
  logic                    lut_v, itp_v, tx_v;
  logic signed [DAC_W-1:0] lut_d;
  logic signed [DAC_W-1:0] itp_d [LANES];
  logic signed [DAC_W-1:0] tx_d  [LANES];

  // The waveform plays for as long as calibration mode is on, independent of
  // run, so that the filter bank sees a settled tone when acquisition starts.
  wave_lut #(.DEPTH(LUT_DEP)) u_lut (
    .clk, .rst_n, .en(cal_mode), .len(($clog2(LUT_DEP)+1)'(lut_len)),
    .wr_en(lut_wr), .wr_addr(($clog2(LUT_DEP))'(lut_addr)), .wr_data(lut_data),
    .out_valid(lut_v), .out_data(lut_d)
  );

  interpolator u_itp (
    .clk, .rst_n, .in_valid(lut_v), .in_data(lut_d), .out_valid(itp_v), .out_data(itp_d)
  );

  nco_mixer #(.W(DAC_W)) u_tx_nco (
    .clk, .rst_n, .en(dac_nco_en), .ftw(dac_ftw),
    .in_valid(itp_v), .in_data(itp_d), .out_valid(tx_v), .out_data(tx_d)
  );

  always_comb begin
    dac_valid = tx_v && cal_mode;
    for (int p = 0; p < int'(LANES); p++) dac_data[p] = dac_valid ? tx_d[p] : '0;
  end
endmodule
