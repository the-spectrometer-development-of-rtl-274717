// pfb_fir: polyphase filter bank front end (the FIR part of the channelizer).
//
// The sample stream (one sample per clock at 256 MSPS) is dealt round-robin
// onto P branches by a commutator counter k = 0..P-1. Branch k is a TAPS-tap
// FIR running at 1/P of the rate:
//   y[mP+k] = sum_t h[(TAPS-1-t)P+k] * x[(m-t)P+k],   t = 0..TAPS-1,
// where h is a prototype low-pass of length P*TAPS: the window h[0..PT-1]
// lies in time order over the newest P*TAPS samples, oldest first. The TAPS-1 past samples
// of every branch live in TAPS-1 delay memories of depth P (block RAM),
// addressed by k; each clock every memory is read and written back with the
// sample of the tap before it, which shifts the chain by one. Each tap has
// its own coefficient memory, also addressed by k. The FFT behind it then turns the P
// branch outputs of every frame into P frequency channels.
//
// Prototype (this design's choice, the paper does not give the window):
// h[n] = sinc((n - (P*TAPS-1)/2) / P) * Hamming(n), in Q1.(CW-1), CW = 18,
// computed when the coefficient memories are initialised. Each branch then
// has a DC gain of about one. Output is rounded and saturated to OUT_W.
// Latency: one clock; out_first marks branch 0 (start of an FFT frame).
// The delay memories are not cleared, so the first TAPS-1 frames after
// power-up carry whatever history they held.
//
// P = 4096 and TAPS = 20 (81920 coefficients) are the paper's numbers.
module pfb_fir #(
  parameter int unsigned P     = spec_pkg::FFT_N,
  parameter int unsigned TAPS  = spec_pkg::PFB_TAPS,
  parameter int unsigned IN_W  = 16,
  parameter int unsigned OUT_W = 18,
  parameter int unsigned CW    = 18
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     in_valid,
  input  logic signed [IN_W-1:0]   in_data,
  output logic                     out_valid,
  output logic                     out_first,
  output logic signed [OUT_W-1:0]  out_data
);
  localparam int unsigned AW = $clog2(P);
  localparam int unsigned CFRAC = CW - 1;

  localparam int unsigned PW = IN_W + CW;

  logic [AW-1:0]          k;
  logic signed [IN_W-1:0] tap_x [TAPS];   // x[(m-t)P+k] for the current branch
  logic signed [PW-1:0]   prod  [TAPS];
  logic signed [PW+5:0]   acc_sum;

  // Prototype coefficient h[idx], idx = 0 .. P*TAPS-1. HC = (P*TAPS-1)/2 is
  // never an integer, so the sinc argument is never zero. Written as one
  // expression to keep the cost of evaluating 81920 of them low.
  localparam real PI = 3.14159265358979;
  localparam real HC = (real'(P * TAPS) - 1.0) / 2.0;

  function automatic logic signed [CW-1:0] proto(int idx);
    return CW'(int'($sin(PI * (real'(idx) - HC) / real'(P)) / (PI * (real'(idx) - HC) / real'(P))
                    * (0.54 - 0.46 * $cos(PI * real'(idx) / HC)) * real'((1 << CFRAC) - 1)));
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      k <= '0;
    end else if (in_valid) begin
      k <= k + 1'b1;   // P is a power of two: wraps at P
    end
  end

  assign tap_x[0] = in_data;

  // Delay chain: one memory per tap, each with one read and one write port.
  // Memory t holds, for every branch, the sample of tap t-1 one frame ago.
  for (genvar t = 1; t < int'(TAPS); t++) begin : g_delay
    logic signed [IN_W-1:0] mem [P];
    assign tap_x[t] = mem[k];
    always_ff @(posedge clk) begin
      if (in_valid) mem[k] <= tap_x[t-1];
    end
  end

  // Coefficient memories: tap t (t frames back) holds h[(TAPS-1-t)P + k].
  for (genvar t = 0; t < int'(TAPS); t++) begin : g_coef
    logic signed [CW-1:0] rom [P];
    initial begin
      for (int i = 0; i < int'(P); i++) rom[i] = proto((int'(TAPS) - 1 - t) * int'(P) + i);
    end
    assign prod[t] = tap_x[t] * rom[k];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_first <= 1'b0;
      out_data  <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        out_data  <= OUT_W'(spec_pkg::sat32((64'(acc_sum) + (64'(1) <<< (CFRAC - 1))) >>> CFRAC, OUT_W));
        out_first <= (k == '0);
      end
    end
  end

  always_comb begin
    acc_sum = '0;
    for (int t = 0; t < int'(TAPS); t++) acc_sum += (PW+6)'(prod[t]);
  end
endmodule
