// interpolator: upsample-by-LANES low-pass interpolator for the DAC path.
//
// Upsampling by L = LANES inserts L-1 zeros between samples; the zeros create
// L-1 spectral images that a low-pass filter then removes. Written polyphase,
// the zero products are never formed: output lane p of clock n is
//   y[Ln + p] = L * sum_k h[Lk + p] * x[n - k],   k = 0 .. LPF_TAPS/L - 1,
// with h = spec_pkg::LPF_COEF (Q15, DC gain 1) and the factor L restoring
// the gain lost to the zeros. One 256 MSPS sample in per clock, eight
// 2048 MSPS samples out per clock, rounded and saturated to W bits.
// Latency: one clock from in_valid to out_valid.
//
// Zero insertion followed by low-pass filtering is how the paper describes
// interpolation, and 256 MSPS -> 2048 MSPS follows from its clock and
// sample rate. The filter is this design's choice.
module interpolator #(
  parameter int unsigned LANES = spec_pkg::LANES,
  parameter int unsigned W     = spec_pkg::DAC_W
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   in_valid,
  input  logic signed [W-1:0]    in_data,
  output logic                   out_valid,
  output logic signed [W-1:0]    out_data [LANES]
);
  import spec_pkg::*;
  localparam int unsigned PH   = LPF_TAPS / LANES;   // taps per phase
  localparam int unsigned GAIN = $clog2(LANES);

  logic signed [W-1:0] hist [PH-1];   // hist[0] = x[n-1]

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 0; k < int'(PH) - 1; k++) hist[k] <= '0;
      for (int p = 0; p < int'(LANES); p++) out_data[p] <= '0;
      out_valid <= 1'b0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        logic signed [W-1:0] x [PH];
        x[0] = in_data;
        for (int k = 1; k < int'(PH); k++) x[k] = hist[k-1];
        for (int p = 0; p < int'(LANES); p++) begin
          logic signed [W+16+8:0] acc;
          acc = '0;
          for (int k = 0; k < int'(PH); k++) acc += x[k] * LPF_COEF[LANES * k + p];
          acc = (acc <<< GAIN) + (1 <<< (LPF_FRAC - 1));
          out_data[p] <= W'(sat32(64'(acc >>> LPF_FRAC), W));
        end
        for (int k = 0; k < int'(PH) - 1; k++) hist[k] <= x[k];
      end
    end
  end
endmodule
