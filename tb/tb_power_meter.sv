// tb_power_meter: self-checking test of the coupler power meter.
//
// Feeds random 12-bit samples, 8 per clock, with a window of 5 clocks and
// checks each latched result against the sum of squares computed here, and
// that done pulses once per window. While disabled no result may appear.
module tb_power_meter;
  localparam int WIN = 5, NWIN = 6;

  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;

  logic en, in_valid, done;
  logic [31:0] window;
  logic signed [11:0] in_data [8];
  logic [63:0] power;

  power_meter dut (.*);

  int checks = 0, failures = 0;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint unsigned ref_sum;
    en = 0; in_valid = 0; window = WIN;
    for (int p = 0; p < 8; p++) in_data[p] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    in_valid = 1;
    repeat (10) begin
      @(posedge clk); @(negedge clk);
      checks++;
      if (done) begin failures++; $display("done while disabled"); end
    end
    en = 1;
    for (int w = 0; w < NWIN; w++) begin
      ref_sum = 0;
      for (int c = 0; c < WIN; c++) begin
        for (int p = 0; p < 8; p++) begin
          int v;
          v = (w == NWIN - 1) ? -2048 : int'($urandom_range(0, 4095)) - 2048;
          in_data[p] = 12'(v);
          ref_sum += longint'(v * v);
        end
        @(posedge clk); @(negedge clk);
        checks++;
        if (done != (c == WIN - 1)) begin failures++; $display("done wrong at window %0d clock %0d", w, c); end
      end
      checks++;
      if (power != ref_sum) begin failures++; $display("window %0d: got %0d expected %0d", w, power, ref_sum); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
