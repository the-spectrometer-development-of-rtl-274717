// tb_decimator: self-checking test of the decimate-by-8 filter.
//
// Feeds random 12-bit samples, 8 per clock, and compares every output with
// the LPF_TAPS-tap FIR sum over the newest LPF_TAPS input samples (128 by
// default), computed here from
// the coefficient table, scaled by 16 and rounded. Then a constant input
// must settle to exactly 16 times its value (unity DC gain).
module tb_decimator;
  import spec_pkg::*;
  localparam int NCLK = 80;
  localparam int H = LPF_TAPS - 8;   // history before the first clock

  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;

  logic in_valid, out_valid;
  logic signed [11:0] in_data [8];
  logic signed [15:0] out_data;

  decimator dut (.*);

  int checks = 0, failures = 0;
  int x [8 * NCLK + LPF_TAPS];

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < H; i++) x[i] = 0;          // reset history
    in_valid = 0;
    for (int p = 0; p < 8; p++) in_data[p] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int n = 0; n < NCLK; n++) begin
      for (int p = 0; p < 8; p++) begin
        x[H + 8 * n + p] = (n < 40) ? int'($urandom_range(0, 4095)) - 2048 : 1000;
        in_data[p] = 12'(x[H + 8 * n + p]);
      end
      in_valid = 1;
      @(posedge clk); @(negedge clk);
      begin
        longint acc;
        int y;
        acc = 0;
        for (int k = 0; k < int'(LPF_TAPS); k++) acc += longint'(LPF_COEF[k]) * longint'(x[H + 8 * n + 7 - k]);
        y = int'((acc + 1024) >>> 11);
        if (y > 32767) y = 32767;
        if (y < -32768) y = -32768;
        checks++;
        if (!out_valid || int'(out_data) != y) begin
          failures++; $display("clock %0d: got %0d expected %0d", n, out_data, y);
        end
        if (n >= 40 + int'(LPF_TAPS) / 8) begin
          checks++;
          if (int'(out_data) != 16000) begin failures++; $display("DC gain: got %0d", out_data); end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
