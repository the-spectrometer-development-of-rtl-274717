// tb_frame_conv: self-checking test of frame conversion (power and
// integration).
//
// Feeds 16-bin FFT frames in bit-reversed order with random values, the
// integration length set to 3 frames, and random back-pressure on the
// output stream. Each received spectrum (low word, high word per bin, tlast
// on the last word) is compared with sums of re^2 + im^2 computed here for
// the lower half of the bins. Integration starts at the first frame boundary
// after run. A second phase stalls the output with a one-frame integration
// and checks that the overflow pulse fires.
module tb_frame_conv;
  localparam int N = 16;
  localparam int L = $clog2(N);
  localparam int NAVG = 3;
  localparam int FRAMES = 13;

  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;

  logic run;
  logic [15:0] navg;
  logic in_valid;
  logic signed [31:0] in_re, in_im;
  logic [L-1:0] in_bin;
  logic [31:0] m_tdata;
  logic m_tlast, m_tvalid, m_tready;
  logic spectrum_done, overflow;

  frame_conv #(.N(N)) dut (.*);

  int checks = 0, failures = 0;
  longint unsigned pw [FRAMES][N];
  int ovf_seen = 0, done_seen = 0;
  bit stall = 0;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int bitrev(int p);
    int r = 0;
    for (int b = 0; b < L; b++) if ((p & (1 << b)) != 0) r |= 1 << (L - 1 - b);
    return r;
  endfunction

  always @(posedge clk) begin
    if (rst_n && overflow) ovf_seen++;
    if (rst_n && spectrum_done) done_seen++;
  end

  always @(negedge clk) m_tready = stall ? 1'b0 : ($urandom_range(0, 1) == 1);

  initial begin
    run = 0; navg = 16'(NAVG); in_valid = 0; in_re = 0; in_im = 0; in_bin = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk) run = 1;
    for (int f = 0; f < FRAMES; f++)
      for (int p = 0; p < N; p++) begin
        int b, re, im;
        b  = bitrev(p);
        re = int'($urandom_range(0, 2000000)) - 1000000;
        im = int'($urandom_range(0, 2000000)) - 1000000;
        pw[f][b] = longint'(re) * longint'(re) + longint'(im) * longint'(im);
        @(negedge clk);
        in_valid = ($urandom_range(0, 3) != 0) || 1'b1;
        in_re = re; in_im = im; in_bin = L'(b);
      end
    @(negedge clk) in_valid = 0;
  end

  // checker: spectra s = 0.. cover frames 1+3s .. 3+3s
  int spec = 0, word = 0;
  longint unsigned cur;
  always @(posedge clk) begin
    if (rst_n && m_tvalid && m_tready && !stall) begin
      int b;
      longint unsigned exp_v;
      b = word / 2;
      exp_v = 0;
      for (int f = 1 + NAVG * spec; f <= NAVG * (spec + 1); f++) exp_v += pw[f][b];
      checks++;
      if (m_tdata != ((word % 2 != 0) ? exp_v[63:32] : exp_v[31:0])) begin
        failures++;
        $display("spectrum %0d bin %0d word %0d: got %h expected %h", spec, b, word % 2, m_tdata, exp_v);
      end
      checks++;
      if (m_tlast != (word == N - 1)) begin failures++; $display("tlast wrong at word %0d", word); end
      word++;
      if (word == N) begin word = 0; spec++; end
      if (spec == (FRAMES - 1) / NAVG) begin
        checks++;
        if (done_seen != spec) begin failures++; $display("spectrum_done count %0d", done_seen); end
        // phase 2: one-frame integrations with the output stalled
        stall = 1;
        fork begin
          navg = 16'd1;
          repeat (3) begin
            for (int p = 0; p < N; p++) begin
              @(negedge clk); in_valid = 1; in_bin = L'(bitrev(p)); in_re = 5; in_im = 7;
            end
          end
          @(negedge clk) in_valid = 0;
          repeat (5) @(posedge clk);
          checks++;
          if (ovf_seen == 0) begin failures++; $display("no overflow while the output was stalled"); end
          $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
          $finish;
        end join_none
      end
    end
  end
endmodule
