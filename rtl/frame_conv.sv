// frame_conv: frame conversion from FFT output to integrated power spectra.
//
// FFT outputs arrive one per clock in bit-reversed order with their bin
// number. Only bins 0..N/2-1 are kept: the input is real, so the upper half
// mirrors the lower one, and the kept half is 0-128 MHz in 62.5 kHz steps.
// For each kept bin the power re^2 + im^2 (64 bits, unsigned) is added into
// an accumulator memory addressed by bin, so the bit-reversed order costs
// nothing. The first frame of an integration overwrites, the next ones add
// with saturation. After navg frames the two halves of the double-buffered
// accumulator swap, and the finished half is read out in natural bin order
// while the next integration fills the other half.
//
// Output is an AXI4-Stream of 32-bit words: for bins 0..N/2-1 the low word
// then the high word of the 64-bit sum, so N words per spectrum, with tlast
// on the last. A 16-word output FIFO absorbs tready back-pressure. If an
// integration finishes while the previous spectrum is still being sent, the
// new one is dropped, overflow pulses, and integration restarts.
// Integration starts at the first frame boundary after run goes high and
// stops at the first boundary after it drops. navg = 0 counts as 1.
//
// The averaging in the FPGA, the 250/500/2500-frame integrations and the
// 32-bit stream width come from the paper. Summing rather than dividing
// (the sum is the average times navg, left to software), the word order and
// the drop-on-overflow policy are this design's choices.
module frame_conv #(
  parameter int unsigned N      = spec_pkg::FFT_N,
  parameter int unsigned W      = 32,
  parameter int unsigned NAVG_W = 16
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     run,
  input  logic [NAVG_W-1:0]        navg,
  // FFT frames (always accepted)
  input  logic                     in_valid,
  input  logic signed [W-1:0]      in_re,
  input  logic signed [W-1:0]      in_im,
  input  logic [$clog2(N)-1:0]     in_bin,
  // spectrum stream
  output logic [31:0]              m_tdata,
  output logic                     m_tlast,
  output logic                     m_tvalid,
  input  logic                     m_tready,
  // status
  output logic                     spectrum_done,  // pulse: an integration completed and was queued
  output logic                     overflow        // pulse: an integration was dropped
);
  localparam int unsigned AW   = $clog2(N);
  localparam int unsigned HALF = N / 2;

  logic [63:0] acc_mem [N];        // {bank, bin[AW-2:0]}

  // ---------------- accumulate path ----------------
  logic              active, wbank;
  logic [NAVG_W-1:0] fcnt;
  logic              a_v, a_first, a_bank;
  logic [AW-2:0]     a_bin;
  logic [63:0]       a_pow;
  logic              rd_busy, rd_bank;
  logic              frame_end, integ_end;
  logic [NAVG_W-1:0] navg_m1;

  function automatic logic [63:0] power(input logic signed [W-1:0] re, input logic signed [W-1:0] im);
    logic signed [63:0] r, i;
    r = 64'(re);
    i = 64'(im);
    return 64'(r * r) + 64'(i * i);
  endfunction

  assign navg_m1   = (navg == '0) ? '0 : navg - 1'b1;
  assign frame_end = in_valid && (in_bin == '1);
  assign integ_end = frame_end && active && (fcnt == navg_m1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active <= 1'b0;
      wbank  <= 1'b0;
      fcnt   <= '0;
      a_v    <= 1'b0;
      a_first <= 1'b0;
      a_bank <= 1'b0;
      a_bin  <= '0;
      a_pow  <= '0;
      spectrum_done <= 1'b0;
      overflow      <= 1'b0;
    end else begin
      spectrum_done <= 1'b0;
      overflow      <= 1'b0;
      a_v     <= in_valid && active && !in_bin[AW-1];
      a_first <= (fcnt == '0);
      a_bank  <= wbank;
      a_bin   <= in_bin[AW-2:0];
      a_pow   <= power(in_re, in_im);
      if (frame_end) begin
        if (!active) begin
          active <= run;
          fcnt   <= '0;
        end else if (integ_end) begin
          fcnt   <= '0;
          active <= run;
          if (rd_busy) overflow <= 1'b1;
          else begin
            wbank <= ~wbank;
            spectrum_done <= 1'b1;
          end
        end else begin
          fcnt   <= fcnt + 1'b1;
          active <= run;
          if (!run) fcnt <= '0;
        end
      end
    end
  end

  always_ff @(posedge clk) begin
    if (a_v) begin
      logic [64:0] sum;
      sum = {1'b0, acc_mem[{a_bank, a_bin}]} + {1'b0, a_pow};
      acc_mem[{a_bank, a_bin}] <= a_first ? a_pow : (sum[64] ? '1 : sum[63:0]);
    end
  end

  // ---------------- readout path ----------------
  logic [AW-1:0] rd_ptr;           // word index: bin = rd_ptr[AW-1:1], rd_ptr[0] selects high word
  logic          r_v, r_last;
  logic [31:0]   r_word;
  logic          of_empty, of_full, of_ovf;
  logic [4:0]    of_count;
  logic [32:0]   of_head;
  logic          issue;

  assign issue = rd_busy && ((of_count + 5'(r_v)) < 5'd15);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_busy <= 1'b0;
      rd_bank <= 1'b0;
      rd_ptr  <= '0;
      r_v     <= 1'b0;
      r_last  <= 1'b0;
      r_word  <= '0;
    end else begin
      r_v <= issue;
      a_no_out_fifo_overflow: assert (!of_ovf) else $error("output FIFO overflow");
      if (issue) begin
        logic [63:0] w64;
        w64    = acc_mem[{rd_bank, rd_ptr[AW-1:1]}];
        r_word <= rd_ptr[0] ? w64[63:32] : w64[31:0];
        r_last <= (rd_ptr == '1);
        rd_ptr <= rd_ptr + 1'b1;
        if (rd_ptr == '1) rd_busy <= 1'b0;
      end
      if (integ_end && !rd_busy) begin
        rd_busy <= 1'b1;
        rd_bank <= wbank;
        rd_ptr  <= '0;
      end
    end
  end

  bram_fifo #(.WIDTH(33), .DEPTH(16)) u_out_fifo (
    .clk, .rst_n,
    .push(r_v), .in_data({r_last, r_word}),
    .pop(m_tvalid && m_tready), .out_data(of_head),
    .empty(of_empty), .full(of_full), .count(of_count), .overflow(of_ovf)
  );

  assign m_tvalid = !of_empty;
  assign m_tdata  = of_head[31:0];
  assign m_tlast  = of_head[32];


endmodule
