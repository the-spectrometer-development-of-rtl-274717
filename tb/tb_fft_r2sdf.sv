// tb_fft_r2sdf: self-checking test of the streaming FFT.
//
// Drives frames of random complex samples (64-point by default, plus one
// frame with idle cycles between samples) and compares every output with a
// direct DFT computed here in floating point, within a small tolerance for
// fixed-point rounding. Also checks the bit-reversed bin numbering, the
// frame marker, and that a continuous input frame comes out as N outputs on
// N consecutive clocks (one sample per clock).
module tb_fft_r2sdf;
  localparam int N = 64;
  localparam int L = $clog2(N);
  localparam int FRAMES = 4;

  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;

  logic in_valid;
  logic signed [17:0] in_re, in_im;
  logic out_valid, out_last;
  logic signed [31:0] out_re, out_im;
  logic [L-1:0] out_bin;

  fft_r2sdf #(.N(N)) dut (.*);

  int checks = 0, failures = 0;
  int xr [FRAMES][N], xi [FRAMES][N];

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // driver
  initial begin
    for (int f = 0; f < FRAMES; f++)
      for (int n = 0; n < N; n++) begin
        xr[f][n] = int'($urandom_range(0, 200000)) - 100000;
        xi[f][n] = (f == 0) ? 0 : int'($urandom_range(0, 200000)) - 100000;
      end
    in_valid = 0; in_re = 0; in_im = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int f = 0; f < FRAMES; f++)
      for (int n = 0; n < N; n++) begin
        if (f == 2 && n % 3 == 1) begin
          @(negedge clk); in_valid = 0;
          @(negedge clk);
        end else @(negedge clk);
        in_valid = 1; in_re = 18'(xr[f][n]); in_im = 18'(xi[f][n]);
      end
    // one more frame to push the last one out
    for (int n = 0; n < N; n++) begin
      @(negedge clk); in_valid = 1; in_re = 0; in_im = 0;
    end
    @(negedge clk); in_valid = 0;
  end

  // monitor
  int frame = 0, seen = 0, run_start = -1, cyc = 0;
  int pos = 0;
  always @(posedge clk) cyc++;
  always @(posedge clk) begin
    if (rst_n && out_valid && frame < FRAMES) begin
      real er, ei, a;
      int k, rk;
      k = int'(out_bin);
      rk = 0;
      for (int b = 0; b < L; b++) if ((pos & (1 << b)) != 0) rk |= 1 << (L - 1 - b);
      checks++;
      if (k != rk) begin failures++; $display("bin %0d at pos %0d, expected %0d", k, pos, rk); end
      er = 0; ei = 0;
      for (int n = 0; n < N; n++) begin
        a = -2.0 * 3.14159265358979 * real'(n) * real'(k) / real'(N);
        er += real'(xr[frame][n]) * $cos(a) - real'(xi[frame][n]) * $sin(a);
        ei += real'(xr[frame][n]) * $sin(a) + real'(xi[frame][n]) * $cos(a);
      end
      checks++;
      if ((real'(out_re) - er) > 40.0 || (er - real'(out_re)) > 40.0 ||
          (real'(out_im) - ei) > 40.0 || (ei - real'(out_im)) > 40.0) begin
        failures++;
        $display("frame %0d bin %0d: got %0d,%0d expected %.1f,%.1f", frame, k, out_re, out_im, er, ei);
      end
      if (pos == 0) run_start = cyc;
      checks++;
      if (out_last != (pos == N - 1)) begin failures++; $display("out_last wrong at pos %0d", pos); end
      if (pos == N - 1) begin
        // frames 0 and 3 come out while gap-free input is fed: N outputs in N clocks
        if (frame == 0 || frame == 3) begin
          checks++;
          if (cyc - run_start != N - 1) begin
            failures++; $display("frame %0d took %0d clocks", frame, cyc - run_start + 1);
          end
        end
        frame++;
      end
      pos = (pos + 1) % N;
      if (frame == FRAMES) begin
        $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
        $finish;
      end
    end
  end
endmodule
