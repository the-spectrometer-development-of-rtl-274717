// tb_interpolator: self-checking test of the x8 interpolator.
//
// Feeds random 14-bit samples one per clock and compares the 8 output lanes
// with the zero-stuffed, low-pass filtered sequence computed here: the
// upsampled stream (sample, then seven zeros) convolved with the
// LPF_TAPS-tap table (128 by default) and multiplied by 8. A constant input
// must come out unchanged on every lane within 10 LSB in 3000, about 0.3 %
// (each polyphase branch of the rounded table has a DC gain within 0.05 % of
// one).
module tb_interpolator;
  import spec_pkg::*;
  localparam int NCLK = 70;
  localparam int H = LPF_TAPS;   // leading zeros of history

  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;

  logic in_valid, out_valid;
  logic signed [13:0] in_data;
  logic signed [13:0] out_data [8];

  interpolator dut (.*);

  int checks = 0, failures = 0;
  int up [8 * NCLK + LPF_TAPS];   // zero-stuffed stream

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 8 * NCLK + H; i++) up[i] = 0;
    in_valid = 0; in_data = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int n = 0; n < NCLK; n++) begin
      int v;
      v = (n < 35) ? int'($urandom_range(0, 12000)) - 6000 : -3000;
      up[H + 8 * n] = v;
      in_data = 14'(v);
      in_valid = 1;
      @(posedge clk); @(negedge clk);
      for (int p = 0; p < 8; p++) begin
        longint acc;
        int y;
        acc = 0;
        for (int j = 0; j < int'(LPF_TAPS); j++) acc += longint'(LPF_COEF[j]) * longint'(up[H + 8 * n + p - j]);
        y = int'((acc * 8 + 16384) >>> 15);
        if (y > 8191) y = 8191;
        if (y < -8192) y = -8192;
        checks++;
        if (!out_valid || int'(out_data[p]) != y) begin
          failures++; $display("clock %0d lane %0d: got %0d expected %0d", n, p, out_data[p], y);
        end
        if (n >= 35 + int'(LPF_TAPS) / 8) begin
          checks++;
          if (int'(out_data[p]) > -2990 || int'(out_data[p]) < -3010) begin failures++; $display("DC: lane %0d got %0d", p, out_data[p]); end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
