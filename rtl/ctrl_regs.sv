// ctrl_regs: AXI4-Lite register file between the processing system and the
// spectrometer logic.
//
// 32-bit registers at the byte addresses listed in spec_pkg (REG_*). A write
// is taken when address and data are both valid (awready and wready rise
// together for one clock) and answered with OKAY on the B channel; a read
// returns data one clock after the address. Unknown addresses read as zero
// and ignore writes. Writing REG_LUT_DATA stores the word at REG_LUT_ADDR in
// the waveform table (lut_wr pulses for one clock); bit 4 of REG_CTRL is a
// self-clearing clear pulse for the DMA counters and sticky status bits.
// Reset values: stopped, detection mode, NCOs bypassed, navg = 250, DMA ring
// of 4096 words at address 0, power meter window 4096 clocks.
//
// The paper says only that AXI-Lite connects the logic to the processing
// system. The register map, the reset values (navg = 250 is the shortest
// integration the paper reports) and the status bits are this design's.
module ctrl_regs (
  input  logic        clk,
  input  logic        rst_n,
  // AXI4-Lite slave
  input  logic [7:0]  s_awaddr,
  input  logic        s_awvalid,
  output logic        s_awready,
  input  logic [31:0] s_wdata,
  input  logic        s_wvalid,
  output logic        s_wready,
  output logic [1:0]  s_bresp,
  output logic        s_bvalid,
  input  logic        s_bready,
  input  logic [7:0]  s_araddr,
  input  logic        s_arvalid,
  output logic        s_arready,
  output logic [31:0] s_rdata,
  output logic [1:0]  s_rresp,
  output logic        s_rvalid,
  input  logic        s_rready,
  // configuration out
  output logic        run,
  output logic        cal_mode,
  output logic        adc_nco_en,
  output logic        dac_nco_en,
  output logic        clear,
  output logic [15:0] navg,
  output logic [31:0] dma_base,
  output logic [31:0] dma_len,
  output logic [31:0] adc_ftw,
  output logic [31:0] dac_ftw,
  output logic [31:0] pm_window,
  output logic [12:0] lut_len,
  output logic        lut_wr,
  output logic [11:0] lut_addr,
  output logic [13:0] lut_data,
  // status in
  input  logic        spec_overflow,   // pulse
  input  logic        spec_done,       // pulse
  input  logic        dma_error,
  input  logic [31:0] dma_frames,
  input  logic [63:0] pm_inc,
  input  logic [63:0] pm_ref,
  input  logic        pm_done          // pulse
);
  import spec_pkg::*;

  logic        ovf_sticky;
  logic [31:0] spectra, pm_cnt;
  logic        wr;

  assign wr        = s_awvalid && s_wvalid && !s_bvalid;
  assign s_awready = wr;
  assign s_wready  = wr;
  assign s_bresp   = 2'b00;
  assign s_rresp   = 2'b00;
  assign s_arready = !s_rvalid;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run <= 1'b0; cal_mode <= 1'b0; adc_nco_en <= 1'b0; dac_nco_en <= 1'b0; clear <= 1'b0;
      navg <= 16'd250; dma_base <= '0; dma_len <= 32'd4096;
      adc_ftw <= '0; dac_ftw <= '0; pm_window <= 32'd4096; lut_len <= 13'd0;
      lut_wr <= 1'b0; lut_addr <= '0; lut_data <= '0;
      s_bvalid <= 1'b0;
      ovf_sticky <= 1'b0; spectra <= '0; pm_cnt <= '0;
    end else begin
      clear  <= 1'b0;
      lut_wr <= 1'b0;
      if (s_bvalid && s_bready) s_bvalid <= 1'b0;
      if (wr) begin
        s_bvalid <= 1'b1;
        case (s_awaddr)
          REG_CTRL:     {clear, dac_nco_en, adc_nco_en, cal_mode, run} <= s_wdata[4:0];
          REG_NAVG:     navg      <= s_wdata[15:0];
          REG_DMA_BASE: dma_base  <= s_wdata;
          REG_DMA_LEN:  dma_len   <= s_wdata;
          REG_ADC_FTW:  adc_ftw   <= s_wdata;
          REG_DAC_FTW:  dac_ftw   <= s_wdata;
          REG_PM_WIN:   pm_window <= s_wdata;
          REG_LUT_LEN:  lut_len   <= s_wdata[12:0];
          REG_LUT_ADDR: lut_addr  <= s_wdata[11:0];
          REG_LUT_DATA: begin lut_data <= s_wdata[13:0]; lut_wr <= 1'b1; end
          default: ;
        endcase
      end
      if (spec_overflow) ovf_sticky <= 1'b1;
      if (spec_done)     spectra <= spectra + 1;
      if (pm_done)       pm_cnt  <= pm_cnt + 1;
      if (clear) begin
        ovf_sticky <= 1'b0;
        spectra    <= '0;
        pm_cnt     <= '0;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s_rvalid <= 1'b0;
      s_rdata  <= '0;
    end else begin
      if (s_rvalid && s_rready) s_rvalid <= 1'b0;
      if (s_arvalid && s_arready) begin
        s_rvalid <= 1'b1;
        case (s_araddr)
          REG_CTRL:     s_rdata <= {28'd0, dac_nco_en, adc_nco_en, cal_mode, run};
          REG_NAVG:     s_rdata <= {16'd0, navg};
          REG_DMA_BASE: s_rdata <= dma_base;
          REG_DMA_LEN:  s_rdata <= dma_len;
          REG_ADC_FTW:  s_rdata <= adc_ftw;
          REG_DAC_FTW:  s_rdata <= dac_ftw;
          REG_PM_WIN:   s_rdata <= pm_window;
          REG_LUT_LEN:  s_rdata <= {19'd0, lut_len};
          REG_LUT_ADDR: s_rdata <= {20'd0, lut_addr};
          REG_LUT_DATA: s_rdata <= {{18{lut_data[13]}}, lut_data};
          REG_STATUS:   s_rdata <= {30'd0, dma_error, ovf_sticky};
          REG_SPECTRA:  s_rdata <= spectra;
          REG_DMA_FRM:  s_rdata <= dma_frames;
          REG_PM_INC_L: s_rdata <= pm_inc[31:0];
          REG_PM_INC_H: s_rdata <= pm_inc[63:32];
          REG_PM_REF_L: s_rdata <= pm_ref[31:0];
          REG_PM_REF_H: s_rdata <= pm_ref[63:32];
          REG_PM_CNT:   s_rdata <= pm_cnt;
          default:      s_rdata <= '0;
        endcase
      end
    end
  end
endmodule
