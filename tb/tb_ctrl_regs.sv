// tb_ctrl_regs: self-checking test of the AXI4-Lite register file.
//
// Checks the reset values, writes every configuration register over the
// bus and checks both the read-back value and the matching output, checks
// the one-clock lut_wr strobe and the self-clearing clear bit, and checks
// that the status counters count pulses on their inputs and read back.
module tb_ctrl_regs;
  import spec_pkg::*;

  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;

  logic [7:0] s_awaddr, s_araddr;
  logic s_awvalid, s_awready, s_wvalid, s_wready, s_bvalid, s_bready;
  logic s_arvalid, s_arready, s_rvalid, s_rready;
  logic [31:0] s_wdata, s_rdata;
  logic [1:0] s_bresp, s_rresp;
  logic run, cal_mode, adc_nco_en, dac_nco_en, clear, lut_wr;
  logic [15:0] navg;
  logic [31:0] dma_base, dma_len, adc_ftw, dac_ftw, pm_window;
  logic [12:0] lut_len;
  logic [11:0] lut_addr;
  logic [13:0] lut_data;
  logic spec_overflow, spec_done, dma_error, pm_done;
  logic [31:0] dma_frames;
  logic [63:0] pm_inc, pm_ref;

  ctrl_regs dut (.*);

  int checks = 0, failures = 0, lut_pulses = 0;

  always @(posedge clk) if (rst_n && lut_wr) lut_pulses++;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic wr(input logic [7:0] a, input logic [31:0] d);
    @(negedge clk);
    s_awaddr = a; s_awvalid = 1; s_wdata = d; s_wvalid = 1;
    do @(posedge clk); while (!(s_awready && s_wready));
    @(negedge clk); s_awvalid = 0; s_wvalid = 0;
    while (!s_bvalid) @(negedge clk);
    checks++;
    if (s_bresp != 2'b00) begin failures++; $display("bad bresp"); end
  endtask

  task automatic rd(input logic [7:0] a, output logic [31:0] d);
    @(negedge clk);
    s_araddr = a; s_arvalid = 1;
    do @(posedge clk); while (!s_arready);
    @(negedge clk); s_arvalid = 0;
    while (!s_rvalid) @(negedge clk);
    d = s_rdata;
  endtask

  task automatic expect_rd(input logic [7:0] a, input logic [31:0] e);
    logic [31:0] d;
    rd(a, d);
    checks++;
    if (d != e) begin failures++; $display("reg %h: read %h expected %h", a, d, e); end
  endtask

  initial begin
    s_awvalid = 0; s_wvalid = 0; s_arvalid = 0; s_bready = 1; s_rready = 1;
    s_awaddr = 0; s_araddr = 0; s_wdata = 0;
    spec_overflow = 0; spec_done = 0; dma_error = 0; pm_done = 0;
    dma_frames = 32'd77; pm_inc = 64'h0123_4567_89AB_CDEF; pm_ref = 64'hFEDC_BA98_7654_3210;
    repeat (3) @(posedge clk);
    rst_n = 1;
    expect_rd(REG_NAVG, 32'd250);
    expect_rd(REG_DMA_LEN, 32'd4096);
    expect_rd(REG_CTRL, 32'd0);
    wr(REG_CTRL, 32'h0F);
    checks++;
    if (!(run && cal_mode && adc_nco_en && dac_nco_en)) begin failures++; $display("CTRL outputs"); end
    expect_rd(REG_CTRL, 32'h0F);
    wr(REG_NAVG, 32'd2500);     expect_rd(REG_NAVG, 32'd2500);
    wr(REG_DMA_BASE, 32'h8000_0000); expect_rd(REG_DMA_BASE, 32'h8000_0000);
    wr(REG_DMA_LEN, 32'd123);   expect_rd(REG_DMA_LEN, 32'd123);
    wr(REG_ADC_FTW, 32'h1234_5678); expect_rd(REG_ADC_FTW, 32'h1234_5678);
    wr(REG_DAC_FTW, 32'h0800_0000); expect_rd(REG_DAC_FTW, 32'h0800_0000);
    wr(REG_PM_WIN, 32'd999);    expect_rd(REG_PM_WIN, 32'd999);
    wr(REG_LUT_LEN, 32'd64);    expect_rd(REG_LUT_LEN, 32'd64);
    checks++;
    if (navg != 16'd2500 || dma_base != 32'h8000_0000 || dma_len != 32'd123 || adc_ftw != 32'h1234_5678 ||
        dac_ftw != 32'h0800_0000 || pm_window != 32'd999 || lut_len != 13'd64) begin
      failures++; $display("configuration outputs");
    end
    wr(REG_LUT_ADDR, 32'd17);
    wr(REG_LUT_DATA, 32'h0000_2ABC);
    @(negedge clk);
    checks++;
    if (lut_pulses != 1 || lut_addr != 12'd17 || lut_data != 14'h2ABC) begin failures++; $display("lut write"); end
    expect_rd(REG_DMA_FRM, 32'd77);
    expect_rd(REG_PM_INC_L, 32'h89AB_CDEF);
    expect_rd(REG_PM_INC_H, 32'h0123_4567);
    expect_rd(REG_PM_REF_L, 32'h7654_3210);
    expect_rd(REG_PM_REF_H, 32'hFEDC_BA98);
    // status pulses
    repeat (3) begin @(negedge clk) spec_done = 1; pm_done = 1; @(negedge clk) spec_done = 0; pm_done = 0; end
    @(negedge clk) spec_overflow = 1; dma_error = 1; @(negedge clk) spec_overflow = 0;
    expect_rd(REG_SPECTRA, 32'd3);
    expect_rd(REG_PM_CNT, 32'd3);
    expect_rd(REG_STATUS, 32'd3);
    wr(REG_CTRL, 32'h11);       // run + clear
    @(negedge clk);
    checks++;
    if (clear) begin failures++; $display("clear did not self-clear"); end
    dma_error = 0;
    expect_rd(REG_STATUS, 32'd0);
    expect_rd(REG_SPECTRA, 32'd0);
    expect_rd(REG_CTRL, 32'h01);
    expect_rd(8'hFC, 32'd0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
