// nco_mixer: numerically controlled oscillator and real mixer for a parallel
// converter bus.
//
// A PHASE_W-bit phase accumulator advances by LANES*ftw every clock; lane p
// uses phase + p*ftw, so the carrier runs at ftw/2^PHASE_W of the sample rate
// (2048 MSPS at the default 8 lanes). The top LUT_AW phase bits address a
// cosine table (Q15, computed when the table is initialised) and each lane's
// sample is multiplied by it and rounded back to W bits with saturation.
// When en is low the samples pass through unchanged and the phase is held
// at zero. Latency is one clock in both cases; valid travels with the data.
//
// The paper places an NCO between the waveform source and the DAC and also
// at the ADC, and says the interpolated signal is "modulated" before the
// DAC. The real-only (cosine) mixing, the table size and the bypass are this
// design's choices.
module nco_mixer #(
  parameter int unsigned LANES   = spec_pkg::LANES,
  parameter int unsigned W       = 14,
  parameter int unsigned PHASE_W = 32,
  parameter int unsigned LUT_AW  = 10
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       en,
  input  logic [PHASE_W-1:0]         ftw,
  input  logic                       in_valid,
  input  logic signed [W-1:0]        in_data  [LANES],
  output logic                       out_valid,
  output logic signed [W-1:0]        out_data [LANES]
);
  localparam int unsigned LUT_N = 1 << LUT_AW;

  logic signed [15:0] cos_lut [LUT_N];
  function automatic logic signed [15:0] cos_q15(int i);
    return 16'(int'($cos(2.0 * 3.14159265358979 * real'(i) / real'(LUT_N)) * 32767.0));
  endfunction

  initial for (int i = 0; i < int'(LUT_N); i++) cos_lut[i] = cos_q15(i);

  logic [PHASE_W-1:0] phase;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      phase <= '0;
    end else if (!en) begin
      phase <= '0;
    end else if (in_valid) begin
      phase <= phase + PHASE_W'(LANES) * ftw;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      for (int p = 0; p < int'(LANES); p++) out_data[p] <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        for (int p = 0; p < int'(LANES); p++) begin
          logic [PHASE_W-1:0] ph;
          logic signed [W+16:0] prod;
          ph   = phase + PHASE_W'(p) * ftw;
          prod = in_data[p] * cos_lut[ph[PHASE_W-1 -: LUT_AW]] + (1 <<< 14);
          out_data[p] <= en ? W'(spec_pkg::sat32(64'(prod >>> 15), W)) : in_data[p];
        end
      end
    end
  end
endmodule
