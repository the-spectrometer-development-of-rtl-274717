// tb_cosmocube_spectrometer: end-to-end test of the spectrometer at its
// full default size (4096-point FFT, 20-tap PFB, 8 lanes at 2048 MSPS).
//
// The processing system is played by AXI4-Lite tasks, DDR4 by
// axi_mem_model, and the converters by this bench: the spectrum ADC gets
// either a synthesised tone or, in calibration mode, the DAC output looped
// back (14-bit codes scaled to 12 bits, as through a cable); the coupler
// ADCs get the DAC output scaled by 1/4 (incident) and 1/16 (reflected).
// Each phase waits 21 frames so that the filter bank history holds only the
// new input, runs one integration of 2 frames, and then reads the spectrum
// the DMA wrote to memory (2048 bins, low word then high word):
//   1. detection mode, 6.25 MHz tone: the peak must be in bin 100
//      (6.25 MHz / 62.5 kHz) and every bin more than 4 away at least
//      80 dB below it;
//   2. receive NCO at 2 MHz: the real mix must put peaks in bins 68 and 132
//      (4.25 and 8.25 MHz) with bin 100 suppressed;
//   3. calibration mode, loopback of a 64-sample LUT sine (4 MHz at
//      256 MSPS): peak in bin 64 with every bin more than 4 away at least
//      70 dB below it, and the incident/reflected power ratio
//      from the power meters must be 16 within 5 %;
//   4. one-frame integrations while memory is slow: the overflow status
//      bit must be set.
// It counts each mechanism (integration, DMA ring wrap, mode switch, NCO
// mixing, LUT write, power measurement, overflow) and fails if one never
// happened.
module tb_cosmocube_spectrometer;
  import spec_pkg::*;
  localparam int N = FFT_N;
  localparam logic [31:0] BASE = 32'h2000_0000;

  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;

  logic adc_valid, dac_valid, cal_mode_o;
  logic signed [11:0] adc_spec [8], adc_inc [8], adc_ref [8];
  logic signed [13:0] dac_data [8];
  logic [7:0] s_awaddr, s_araddr;
  logic s_awvalid, s_awready, s_wvalid, s_wready, s_bvalid, s_bready;
  logic s_arvalid, s_arready, s_rvalid, s_rready;
  logic [31:0] s_wdata, s_rdata;
  logic [1:0] s_bresp, s_rresp;
  logic [31:0] m_awaddr, m_wdata;
  logic [7:0] m_awlen;
  logic [2:0] m_awsize;
  logic [1:0] m_awburst, m_bresp;
  logic m_awvalid, m_awready, m_wlast, m_wvalid, m_wready, m_bvalid, m_bready;
  logic [3:0] m_wstrb;

  cosmocube_spectrometer dut (.*);

  axi_mem_model ddr (.clk, .rst_n, .awaddr(m_awaddr), .awlen(m_awlen), .awvalid(m_awvalid),
    .awready(m_awready), .wdata(m_wdata), .wvalid(m_wvalid), .wready(m_wready),
    .bresp(m_bresp), .bvalid(m_bvalid), .bready(m_bready));

  int checks = 0, failures = 0;
  int n_integ = 0, n_wrap = 0, n_mode = 0, n_nco = 0, n_lut = 0, n_pm = 0, n_ovf = 0;

  initial begin
    repeat (3_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- converters ----------------
  real tone_hz = 6.25e6;
  bit  loopback = 0;
  longint sample_idx = 0;
  always @(posedge clk) begin
    adc_valid <= rst_n;
    for (int p = 0; p < 8; p++) begin
      if (loopback) begin
        adc_spec[p] <= 12'(dac_data[p] >>> 2);
        adc_inc[p]  <= 12'(dac_data[p] >>> 4);
        adc_ref[p]  <= 12'(dac_data[p] >>> 6);
      end else begin
        adc_spec[p] <= 12'(int'(1500.0 * $cos(2.0 * 3.14159265358979 * tone_hz * real'(sample_idx + longint'(p)) / 2.048e9)));
        adc_inc[p]  <= '0;
        adc_ref[p]  <= '0;
      end
    end
    sample_idx += 8;
  end

  // ---------------- observers ----------------
  logic last_cal = 0;
  always @(posedge clk) if (rst_n) begin
    if (dut.spec_done) n_integ++;
    if (dut.spec_overflow) n_ovf++;
    if (dut.pm_done_inc) n_pm++;
    if (dut.lut_wr) n_lut++;
    if (m_awvalid && m_awready && m_awaddr == BASE && dut.dma_words != 0) n_wrap++;
    if (cal_mode_o != last_cal) n_mode++;
    last_cal <= cal_mode_o;
  end

  // ---------------- processing-system side ----------------
  task automatic wr(input logic [7:0] a, input logic [31:0] d);
    @(negedge clk);
    s_awaddr = a; s_awvalid = 1; s_wdata = d; s_wvalid = 1;
    do @(posedge clk); while (!(s_awready && s_wready));
    @(negedge clk); s_awvalid = 0; s_wvalid = 0;
    while (!s_bvalid) @(negedge clk);
  endtask

  task automatic rd(input logic [7:0] a, output logic [31:0] d);
    @(negedge clk);
    s_araddr = a; s_arvalid = 1;
    do @(posedge clk); while (!s_arready);
    @(negedge clk); s_arvalid = 0;
    while (!s_rvalid) @(negedge clk);
    d = s_rdata;
  endtask

  real spec [N/2];

  // Flush the filter bank, run one 2-frame integration, wait for it in memory.
  task automatic acquire(input logic [31:0] ctrl_bits);
    logic [31:0] f0, f;
    wr(REG_CTRL, ctrl_bits & ~32'h1);
    repeat (21 * N) @(posedge clk);
    rd(REG_DMA_FRM, f0);
    wr(REG_CTRL, ctrl_bits | 32'h1);
    do begin
      repeat (512) @(posedge clk);
      rd(REG_DMA_FRM, f);
    end while (f == f0);
    wr(REG_CTRL, ctrl_bits & ~32'h1);
    for (int b = 0; b < N / 2; b++) begin
      logic [63:0] v;
      v = {ddr.mem[BASE + 32'(8 * b + 4)], ddr.mem[BASE + 32'(8 * b)]};
      spec[b] = real'(v);
    end
  endtask

  function automatic int peak_bin();
    int pk = 1;
    for (int b = 1; b < N / 2; b++) if (spec[b] > spec[pk]) pk = b;
    return pk;
  endfunction

  // worst ratio of spec[pk] to any bin farther than 4 bins from the listed peaks
  function automatic real isolation(input int pk, input int other = -100);
    real worst = 0.0;
    for (int b = 1; b < N / 2; b++)
      if ((b < pk - 4 || b > pk + 4) && (b < other - 4 || b > other + 4) && spec[b] > worst) worst = spec[b];
    return spec[pk] / (worst + 1.0);
  endfunction

  initial begin
    logic [31:0] d, pil, pih, prl, prh;
    int pk;
    real ratio;
    s_awvalid = 0; s_wvalid = 0; s_arvalid = 0; s_bready = 1; s_rready = 1;
    s_awaddr = 0; s_araddr = 0; s_wdata = 0;
    repeat (4) @(posedge clk);
    rst_n = 1;
    wr(REG_NAVG, 32'd2);
    wr(REG_DMA_BASE, BASE);
    wr(REG_DMA_LEN, 32'(N));
    wr(REG_PM_WIN, 32'd1024);

    // 1. detection mode
    acquire(32'h0);
    pk = peak_bin();
    checks++;
    if (pk != 100) begin failures++; $display("phase 1: peak in bin %0d, expected 100", pk); end
    checks++;
    if (isolation(100) < 1.0e8) begin failures++; $display("phase 1: isolation %.1f", isolation(100)); end
    $display("phase 1: peak bin %0d, isolation %.3g", pk, isolation(100));

    // 2. receive NCO at 2 MHz
    wr(REG_ADC_FTW, 32'd4194304);
    acquire(32'h4);
    n_nco++;
    checks++;
    if (!(spec[68] > 1.0e3 * spec[100] && spec[132] > 1.0e3 * spec[100])) begin
      failures++; $display("phase 2: bins 68/100/132 = %g %g %g", spec[68], spec[100], spec[132]);
    end
    checks++;
    ratio = spec[68] / (spec[132] + 1.0);
    if (ratio < 0.8 || ratio > 1.25 || isolation(68, 132) < 1.0e3) begin
      failures++; $display("phase 2: ratio %.3f isolation %.3g", ratio, isolation(68, 132));
    end
    $display("phase 2: bins 68 %.3g, 132 %.3g, 100 %.3g", spec[68], spec[132], spec[100]);

    // 3. calibration mode with DAC loopback
    wr(REG_LUT_LEN, 32'd64);
    for (int i = 0; i < 64; i++) begin
      wr(REG_LUT_ADDR, 32'(i));
      wr(REG_LUT_DATA, 32'(int'(6000.0 * $sin(2.0 * 3.14159265358979 * real'(i) / 64.0))));
    end
    loopback = 1;
    acquire(32'h2);
    pk = peak_bin();
    checks++;
    if (pk != 64 || isolation(64) < 1.0e7) begin failures++; $display("phase 3: peak bin %0d isolation %.3g", pk, isolation(64)); end
    $display("phase 3: peak bin %0d, isolation %.3g", pk, isolation(64));
    rd(REG_PM_INC_L, pil); rd(REG_PM_INC_H, pih); rd(REG_PM_REF_L, prl); rd(REG_PM_REF_H, prh);
    ratio = real'({pih, pil}) / (real'({prh, prl}) + 1.0);
    checks++;
    if (ratio < 15.2 || ratio > 16.8) begin failures++; $display("phase 3: power ratio %.3f", ratio); end
    $display("phase 3: incident/reflected power ratio %.3f", ratio);
    checks++;
    rd(REG_PM_CNT, d);
    if (d == 0) begin failures++; $display("no power measurement"); end

    // 4. overflow: one-frame integrations, memory slower than the spectrum rate
    loopback = 0;
    wr(REG_NAVG, 32'd1);
    wr(REG_CTRL, 32'h1);
    repeat (6 * N) @(posedge clk);
    wr(REG_CTRL, 32'h0);
    rd(REG_STATUS, d);
    checks++;
    if (!d[0]) begin failures++; $display("overflow status not set"); end
    repeat (20 * N) @(posedge clk);   // let the DMA drain

    $display("mechanisms: integrations %0d, ring wraps %0d, mode switches %0d, NCO %0d, LUT writes %0d, power results %0d, overflows %0d",
             n_integ, n_wrap, n_mode, n_nco, n_lut, n_pm, n_ovf);
    checks++; if (n_integ == 0) begin failures++; $display("no integration completed"); end
    checks++; if (n_wrap == 0)  begin failures++; $display("no DMA ring wrap"); end
    checks++; if (n_mode < 2)   begin failures++; $display("mode switch missing"); end
    checks++; if (n_nco == 0)   begin failures++; $display("NCO never used"); end
    checks++; if (n_lut != 64)  begin failures++; $display("LUT writes %0d", n_lut); end
    checks++; if (n_pm == 0)    begin failures++; $display("no power measurement"); end
    checks++; if (n_ovf == 0)   begin failures++; $display("no overflow"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
