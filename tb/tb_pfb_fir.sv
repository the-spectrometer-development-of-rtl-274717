// tb_pfb_fir: self-checking test of the polyphase filter bank front end.
//
// With 8 branches and 4 taps, drives random samples one per clock and
// compares each output with y[mP+k] = sum_t h[(T-1-t)P+k] x[(m-t)P+k], where the
// prototype h (Hamming-windowed sinc, Q1.17) and the sums are computed here.
// Outputs are checked once the filter history is full (after TAPS-1 frames).
// Also checks out_first on branch 0 and the one-clock latency.
module tb_pfb_fir;
  localparam int P = 8, TAPS = 4, NS = 200;

  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;

  logic in_valid, out_valid, out_first;
  logic signed [15:0] in_data;
  logic signed [17:0] out_data;

  pfb_fir #(.P(P), .TAPS(TAPS)) dut (.*);

  int checks = 0, failures = 0;
  int x [NS];
  int h [P*TAPS];

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real pi, m, s, w;
    pi = 3.14159265358979;
    for (int n = 0; n < P * TAPS; n++) begin
      m = (real'(n) - (real'(P * TAPS) - 1.0) / 2.0) / real'(P);
      s = (m == 0.0) ? 1.0 : $sin(pi * m) / (pi * m);
      w = 0.54 - 0.46 * $cos(2.0 * pi * real'(n) / (real'(P * TAPS) - 1.0));
      h[n] = int'(s * w * 131071.0);
    end
    for (int n = 0; n < NS; n++) x[n] = int'($urandom_range(0, 60000)) - 30000;
    in_valid = 0; in_data = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int n = 0; n < NS; n++) begin
      in_valid = 1; in_data = 16'(x[n]);
      @(posedge clk); @(negedge clk);
      checks++;
      if (!out_valid || out_first != (n % P == 0)) begin
        failures++; $display("sample %0d: valid %0d first %0d", n, out_valid, out_first);
      end
      if (n >= (TAPS - 1) * P) begin
        longint acc;
        int y;
        acc = 0;
        for (int t = 0; t < TAPS; t++) acc += longint'(h[(TAPS - 1 - t) * P + n % P]) * longint'(x[n - t * P]);
        y = int'((acc + 65536) >>> 17);
        if (y > 131071) y = 131071;
        if (y < -131072) y = -131072;
        checks++;
        if (int'(out_data) != y) begin
          failures++; $display("sample %0d: got %0d expected %0d", n, out_data, y);
        end
      end
    end
    in_valid = 0;
    @(posedge clk); @(negedge clk);
    checks++;
    if (out_valid) begin failures++; $display("out_valid without input"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
