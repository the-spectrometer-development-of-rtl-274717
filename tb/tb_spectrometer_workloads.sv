// tb_spectrometer_workloads: the spectrometer's evaluation runs, at full size.
//
// Drives the whole spectrometer (default parameters: 4096-point FFT, 20-tap
// polyphase filter bank, 8 samples per clock at 2048 MSPS) through the two
// measurements its published evaluation makes on the channelizer itself,
// with the converter replaced by samples computed here and DDR4 by
// axi_mem_model:
//
//   1. Channel leakage. A tone is stepped in 6.25 kHz steps (a tenth of a
//      channel) from 1.25 channels below to 1.25 channels above the centre of
//      channel 560 (35 MHz), and the power of channel 560 is recorded at each
//      step. The response must be flat within 1 dB for offsets up to a quarter
//      of a channel, must fall through -6 dB +- 3 dB at half a channel (where
//      the channel meets its neighbour), and must be at least 50 dB down
//      from 0.6 of a channel on.
//   2. Noise floor against integration length. Gaussian-like noise (the sum of
//      four uniform variables per sample) is integrated over 250, 500 and 2500
//      frames. The bin-to-bin scatter of the spectrum, measured as the
//      standard deviation of (s[b] - s[b+1]) / (s[b] + s[b+1]) over bins
//      100..1900, must be within 20 % of 1/sqrt(2 navg), the value for
//      independent bins averaged over navg frames; and the mean level divided
//      by navg must agree between the three runs within 5 % (the output is the
//      sum over the integration).
//
// Each acquisition first waits 21 frames so that the filter bank history
// holds only the current input. The sizes (6.25 kHz steps, a channel near
// 35 MHz, 250/500/2500 frames) follow the published measurements; the pass
// limits are this bench's own. A watchdog stops the run after 25 million
// clocks.
module tb_spectrometer_workloads;
  import spec_pkg::*;
  localparam int N = FFT_N;
  localparam logic [31:0] BASE = 32'h4000_0000;
  localparam int CH = 560;

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

  initial begin
    repeat (25_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- converter ----------------
  real    tone_hz = 35.0e6;
  bit     noise = 0;
  longint sample_idx = 0;

  function automatic logic signed [11:0] noise_sample();
    int s = 0;
    for (int i = 0; i < 4; i++) s += int'($urandom % 1024) - 512;
    return 12'(s);
  endfunction

  function automatic logic signed [11:0] tone_sample(real f, longint idx);
    return 12'(int'(1500.0 * $cos(2.0 * 3.14159265358979 * f * real'(idx) / 2.048e9)));
  endfunction

  always @(posedge clk) begin
    adc_valid <= rst_n;
    for (int p = 0; p < 8; p++) begin
      adc_spec[p] <= noise ? noise_sample() : tone_sample(tone_hz, sample_idx + longint'(p));
      adc_inc[p]  <= '0;
      adc_ref[p]  <= '0;
    end
    sample_idx += 8;
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

  // Flush the filter bank, run one integration of navg frames, wait for it
  // to reach memory and copy it into spec[].
  task automatic acquire(input int navg);
    logic [31:0] f0, f;
    wr(REG_CTRL, 32'h0);
    wr(REG_NAVG, 32'(navg));
    repeat (21 * N) @(posedge clk);
    rd(REG_DMA_FRM, f0);
    wr(REG_CTRL, 32'h1);
    do begin
      repeat (1024) @(posedge clk);
      rd(REG_DMA_FRM, f);
    end while (f == f0);
    wr(REG_CTRL, 32'h0);
    for (int b = 0; b < N / 2; b++) begin
      logic [63:0] v;
      v = {ddr.mem[BASE + 32'(8 * b + 4)], ddr.mem[BASE + 32'(8 * b)]};
      spec[b] = real'(v);
    end
  endtask

  function automatic real db(real r);
    return 10.0 * $ln(r) / $ln(10.0);
  endfunction

  localparam int STEPS = 12;   // steps of 6.25 kHz on each side of the centre
  real resp [-STEPS:STEPS];

  initial begin
    real peak, r, mean, sq, d, scatter, expect_sc;
    real level [3];
    automatic int navgs [3] = '{250, 500, 2500};
    s_awvalid = 0; s_wvalid = 0; s_arvalid = 0; s_bready = 1; s_rready = 1;
    s_awaddr = 0; s_araddr = 0; s_wdata = 0;
    repeat (4) @(posedge clk);
    rst_n = 1;
    wr(REG_DMA_BASE, BASE);
    wr(REG_DMA_LEN, 32'(N));

    // 1. channel leakage around channel 560 (35 MHz)
    for (int k = -STEPS; k <= STEPS; k++) begin
      tone_hz = 35.0e6 + 6.25e3 * real'(k);
      acquire(2);
      resp[k] = spec[CH];
    end
    peak = 0.0;
    for (int k = -STEPS; k <= STEPS; k++) if (resp[k] > peak) peak = resp[k];
    for (int k = -STEPS; k <= STEPS; k++) begin
      int a;
      a = (k < 0) ? -k : k;
      r = db(resp[k] / peak + 1.0e-30);
      $display("leakage: offset %6.2f kHz  channel %0d at %7.2f dB", 6.25 * real'(k), CH, r);
      checks++;
      if (a <= 2 && r < -1.0) begin
        failures++; $display("  flat top violated at offset step %0d", k);
      end
      if (a == 5 && (r < -9.0 || r > -3.0)) begin
        failures++; $display("  half-channel response out of range at step %0d", k);
      end
      if (a >= 6 && r > -50.0) begin
        failures++; $display("  leakage too high at step %0d", k);
      end
    end

    // 2. noise floor against integration length
    noise = 1;
    for (int i = 0; i < 3; i++) begin
      acquire(navgs[i]);
      mean = 0.0; sq = 0.0;
      for (int b = 100; b < 1900; b++) begin
        d = (spec[b] - spec[b+1]) / (spec[b] + spec[b+1] + 1.0);
        mean += d; sq += d * d;
      end
      mean /= 1800.0;
      scatter = $sqrt(sq / 1800.0 - mean * mean);
      expect_sc = 1.0 / $sqrt(2.0 * real'(navgs[i]));
      level[i] = 0.0;
      for (int b = 100; b < 1900; b++) level[i] += spec[b];
      level[i] /= 1800.0 * real'(navgs[i]);
      $display("noise: navg %0d  scatter %.4f (independent bins %.4f)  level per frame %.4g",
               navgs[i], scatter, expect_sc, level[i]);
      checks++;
      if (scatter < 0.8 * expect_sc || scatter > 1.2 * expect_sc) begin
        failures++; $display("  scatter out of range");
      end
    end
    for (int i = 1; i < 3; i++) begin
      checks++;
      if (level[i] < 0.95 * level[0] || level[i] > 1.05 * level[0]) begin
        failures++; $display("  level of navg %0d differs from navg 250", navgs[i]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
