// fft_r2sdf: streaming N-point fixed-point FFT, one complex sample per clock.
//
// log2(N) radix-2 single-path delay-feedback stages (fft_sdf_stage) are
// chained with feedback depths N/2, N/4, ..., 1. Input is in natural order,
// frame-aligned from the first valid sample after reset; output is in
// bit-reversed order, and out_bin gives the frequency bin of each output
// (the bit reverse of its position in the frame), out_last marks the final
// output of a frame. The feedback memories are the block RAM the FFT uses.
//
// Input samples of IN_W bits are sign-extended to W bits; no scaling is done
// inside, so W must be at least IN_W + log2(N) + 1 (32 for the defaults).
// The transform is unscaled: X[k] = sum_n x[n] exp(-j 2 pi n k / N).
// Latency: N-1 valid samples plus one clock per stage.
//
// The 4096 length and fixed-point arithmetic are the paper's; the SDF
// architecture, widths and rounding are this design's choices.
module fft_r2sdf #(
  parameter int unsigned N    = spec_pkg::FFT_N,
  parameter int unsigned IN_W = 18,
  parameter int unsigned W    = 32
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     in_valid,
  input  logic signed [IN_W-1:0]   in_re,
  input  logic signed [IN_W-1:0]   in_im,
  output logic                     out_valid,
  output logic signed [W-1:0]      out_re,
  output logic signed [W-1:0]      out_im,
  output logic [$clog2(N)-1:0]     out_bin,
  output logic                     out_last
);
  localparam int unsigned L = $clog2(N);

  logic                v  [L+1];
  logic signed [W-1:0] re [L+1];
  logic signed [W-1:0] im [L+1];

  assign v[0]  = in_valid;
  assign re[0] = W'(in_re);
  assign im[0] = W'(in_im);

  for (genvar s = 0; s < int'(L); s++) begin : g_stage
    fft_sdf_stage #(.D(N >> (s + 1)), .W(W)) u_stage (
      .clk, .rst_n,
      .in_valid (v[s]),   .in_re (re[s]),   .in_im (im[s]),
      .out_valid(v[s+1]), .out_re(re[s+1]), .out_im(im[s+1])
    );
  end

  logic [L-1:0] pos;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) pos <= '0;
    else if (v[L]) pos <= pos + 1'b1;
  end

  always_comb begin
    for (int b = 0; b < int'(L); b++) out_bin[b] = pos[L-1-b];
  end

  assign out_valid = v[L];
  assign out_re    = re[L];
  assign out_im    = im[L];
  assign out_last  = v[L] && (pos == '1);
endmodule
