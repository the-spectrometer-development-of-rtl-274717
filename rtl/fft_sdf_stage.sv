// fft_sdf_stage: one radix-2 single-path delay-feedback (R2SDF) stage of a
// decimation-in-frequency FFT.
//
// The stage works on blocks of 2*D samples. During the first D samples of a
// block the inputs are written into a D-deep feedback memory and the stage
// emits what that memory held: the differences a-b of the previous block,
// multiplied by the twiddle W_{2D}^n = exp(-j*2*pi*n/(2D)), n = 0..D-1.
// During the second D samples the butterfly runs: the stage emits the sums
// a+b and stores the differences a-b in the memory. Output therefore lags
// input by D valid samples; the stage reports out_valid once it has seen D
// samples. Everything advances only on in_valid (bubbles pass through), and
// the output is registered (one clock).
//
// Twiddles are Q2.16 in TW_W = 18 bits, computed when the table is
// initialised; products are rounded. Data width W is constant across the
// stages; the caller gives enough headroom for the log2(N) bits of growth.
module fft_sdf_stage #(
  parameter int unsigned D    = 1,
  parameter int unsigned W    = 32,
  parameter int unsigned TW_W = 18
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                in_valid,
  input  logic signed [W-1:0] in_re,
  input  logic signed [W-1:0] in_im,
  output logic                out_valid,
  output logic signed [W-1:0] out_re,
  output logic signed [W-1:0] out_im
);
  localparam int unsigned CW    = $clog2(2 * D);   // block counter width
  localparam int unsigned TFRAC = TW_W - 2;

  logic [CW-1:0]        cnt;
  logic                 primed;
  logic                 second;      // in the butterfly half of the block
  logic signed [W-1:0]  fb_re, fb_im; // feedback memory output
  logic signed [W-1:0]  st_re, st_im; // value written back

  assign second = cnt[CW-1];

  generate
    if (D == 1) begin : g_reg
      logic signed [W-1:0] r_re, r_im;
      always_ff @(posedge clk) if (in_valid) begin r_re <= st_re; r_im <= st_im; end
      assign fb_re = r_re;
      assign fb_im = r_im;
    end else begin : g_mem
      logic signed [W-1:0] m_re [D];
      logic signed [W-1:0] m_im [D];
      logic [CW-2:0] a;
      assign a = cnt[CW-2:0];
      always_ff @(posedge clk) if (in_valid) begin m_re[a] <= st_re; m_im[a] <= st_im; end
      assign fb_re = m_re[a];
      assign fb_im = m_im[a];
    end
  endgenerate

  // Twiddle table W_{2D}^n for n = 0..D-1.
  logic signed [TW_W-1:0] tw_c [D];
  logic signed [TW_W-1:0] tw_s [D];
  function automatic logic signed [TW_W-1:0] twiddle(int n, bit sine);
    real ang;
    ang = 2.0 * 3.14159265358979 * real'(n) / real'(2 * D);
    return TW_W'(int'((sine ? $sin(ang) : $cos(ang)) * real'(1 << TFRAC)));
  endfunction

  initial begin
    for (int n = 0; n < int'(D); n++) begin
      tw_c[n] = twiddle(n, 1'b0);
      tw_s[n] = twiddle(n, 1'b1);
    end
  end

  localparam int unsigned TIW = (D > 1) ? $clog2(D) : 1;
  logic [TIW-1:0] tidx;
  assign tidx = TIW'(cnt % CW'(D));

  always_comb begin
    st_re = in_re;
    st_im = in_im;
    if (second) begin
      st_re = fb_re - in_re;
      st_im = fb_im - in_im;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt       <= '0;
      primed    <= 1'b0;
      out_valid <= 1'b0;
      out_re    <= '0;
      out_im    <= '0;
    end else begin
      out_valid <= in_valid && (primed || second);
      if (in_valid) begin
        cnt <= cnt + 1'b1;
        if (second) primed <= 1'b1;
        if (second) begin
          out_re <= fb_re + in_re;
          out_im <= fb_im + in_im;
        end else begin
          // (a + jb)(c - js) = (ac + bs) + j(bc - as)
          logic signed [W+TW_W:0] pr, pi;
          logic signed [TW_W-1:0] c, s;
          c  = tw_c[tidx];
          s  = tw_s[tidx];
          pr = fb_re * c + fb_im * s + (1 <<< (TFRAC - 1));
          pi = fb_im * c - fb_re * s + (1 <<< (TFRAC - 1));
          out_re <= W'(pr >>> TFRAC);
          out_im <= W'(pi >>> TFRAC);
        end
      end
    end
  end
endmodule
