// tb_wave_lut: self-checking test of the calibration waveform table.
//
// Checks the initial content (one sine period over the table), then writes
// a 10-entry random pattern, plays it with len = 10 and checks that it
// repeats sample by sample, one per clock, starting from address 0 each
// time the table is enabled.
module tb_wave_lut;
  localparam int DEPTH = 64;

  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;

  logic en, wr_en, out_valid;
  logic [6:0] len;
  logic [5:0] wr_addr;
  logic signed [13:0] wr_data, out_data;

  wave_lut #(.DEPTH(DEPTH)) dut (.*);

  int checks = 0, failures = 0;
  int pat [10];

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    en = 0; wr_en = 0; len = 0; wr_addr = 0; wr_data = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    en = 1;   // len = 0: whole table, initial sine
    for (int i = 0; i < DEPTH + 4; i++) begin
      real e;
      @(posedge clk); @(negedge clk);
      e = $sin(2.0 * 3.14159265358979 * real'(i % DEPTH) / real'(DEPTH)) * 8191.0;
      checks++;
      if (!out_valid || real'(out_data) - e > 1.0 || e - real'(out_data) > 1.0) begin
        failures++; $display("sine entry %0d: got %0d expected %.1f", i, out_data, e);
      end
    end
    en = 0;
    for (int i = 0; i < 10; i++) begin
      pat[i] = int'($urandom_range(0, 16383)) - 8192;
      wr_en = 1; wr_addr = 6'(i); wr_data = 14'(pat[i]);
      @(posedge clk); @(negedge clk);
    end
    wr_en = 0; len = 7'd10;
    repeat (2) begin
      en = 1;
      for (int i = 0; i < 25; i++) begin
        @(posedge clk); @(negedge clk);
        checks++;
        if (!out_valid || int'(out_data) != pat[i % 10]) begin
          failures++; $display("pattern step %0d: got %0d expected %0d", i, out_data, pat[i % 10]);
        end
      end
      en = 0;
      @(posedge clk); @(negedge clk);
      checks++;
      if (out_valid) begin failures++; $display("out_valid while disabled"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
