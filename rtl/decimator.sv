// decimator: decimate-by-LANES low-pass filter for the receive chain.
//
// Each clock brings LANES consecutive ADC samples (2048 MSPS as 8 lanes at
// 256 MHz). The block keeps the last LPF_TAPS samples and computes one
// output per clock, y[n] = sum_k h[k] * x[LANES*n + LANES-1 - k], i.e. the
// low-pass filtered stream sampled at 1/LANES of the input rate (256 MSPS,
// covering 0-128 MHz). h is spec_pkg::LPF_COEF (Q15, DC gain 1). The output
// carries OUT_W-IN_W extra fraction bits (x16 by default) and saturates.
// Latency: one clock from in_valid to out_valid.
//
// The decimation itself (and the 2048 -> 256 MSPS rates) follow the paper;
// the filter length and its coefficients are this design's choice.
module decimator #(
  parameter int unsigned LANES = spec_pkg::LANES,
  parameter int unsigned IN_W  = spec_pkg::ADC_W,
  parameter int unsigned OUT_W = 16
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     in_valid,
  input  logic signed [IN_W-1:0]   in_data [LANES],
  output logic                     out_valid,
  output logic signed [OUT_W-1:0]  out_data
);
  import spec_pkg::*;
  localparam int unsigned HIST = LPF_TAPS - LANES;  // samples kept from earlier clocks
  localparam int unsigned SHIFT = LPF_FRAC - (OUT_W - IN_W);

  logic signed [IN_W-1:0] hist [HIST];  // hist[0] is the newest kept sample

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < int'(HIST); i++) hist[i] <= '0;
      out_valid <= 1'b0;
      out_data  <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        logic signed [IN_W-1:0] win [LPF_TAPS];   // win[k] = x[newest - k]
        logic signed [IN_W+16+8:0] acc;
        for (int k = 0; k < int'(LANES); k++) win[k] = in_data[LANES-1-k];
        for (int k = 0; k < int'(HIST); k++)  win[LANES+k] = hist[k];
        acc = '0;
        for (int k = 0; k < int'(LPF_TAPS); k++) acc += win[k] * LPF_COEF[k];
        out_data <= OUT_W'(sat32((64'(acc) + (64'(1) <<< (SHIFT - 1))) >>> SHIFT, OUT_W));
        for (int k = 0; k < int'(HIST); k++) hist[k] <= win[k];
      end
    end
  end
endmodule
