// tb_nco_mixer: self-checking test of the NCO and mixer.
//
// With the NCO bypassed the 8 lanes must pass unchanged (one clock later).
// Enabled with a phase step of 2^32/16 (a carrier at 1/16 of the sample
// rate, 128 MHz at 2048 MSPS) and a constant input, lane p of clock n must
// equal A*cos(2*pi*(8n+p)/16), computed here, within 2 LSB; a second step
// of 2^32*3/64 checks the phase accumulation across clocks.
module tb_nco_mixer;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;

  logic en, in_valid, out_valid;
  logic [31:0] ftw;
  logic signed [13:0] in_data [8], out_data [8];

  nco_mixer #(.W(14)) dut (.*);

  int checks = 0, failures = 0;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run_tone(input longint step, input int amp, input int nclk);
    @(negedge clk);
    en = 0; in_valid = 0;
    @(negedge clk);                 // phase returns to zero while disabled
    en = 1; ftw = 32'(step);
    for (int p = 0; p < 8; p++) in_data[p] = 14'(amp);
    for (int n = 0; n < nclk; n++) begin
      in_valid = 1;
      @(posedge clk); @(negedge clk);
      for (int p = 0; p < 8; p++) begin
        real ph, e;
        ph = 2.0 * 3.14159265358979 * real'(((longint'(8 * n) + longint'(p)) * longint'(step)) % 64'h1_0000_0000) / 4294967296.0;
        e = real'(amp) * $cos(ph);
        checks++;
        if (!out_valid || real'(out_data[p]) - e > 2.5 || e - real'(out_data[p]) > 2.5) begin
          failures++; $display("step %0d clock %0d lane %0d: got %0d expected %.1f", step, n, p, out_data[p], e);
        end
      end
    end
  endtask

  initial begin
    en = 0; in_valid = 0; ftw = 0;
    for (int p = 0; p < 8; p++) in_data[p] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // bypass
    for (int n = 0; n < 10; n++) begin
      @(negedge clk);
      in_valid = 1;
      for (int p = 0; p < 8; p++) in_data[p] = 14'($urandom_range(0, 16383));
      @(posedge clk); @(negedge clk);
      for (int p = 0; p < 8; p++) begin
        checks++;
        if (!out_valid || out_data[p] != in_data[p]) begin failures++; $display("bypass lane %0d", p); end
      end
    end
    run_tone(64'h1000_0000, 6000, 12);
    run_tone(64'h1_0000_0000 * 3 / 64, -7000, 20);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
