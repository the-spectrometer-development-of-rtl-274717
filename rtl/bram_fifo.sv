// bram_fifo: synchronous first-in first-out buffer, written as a block-RAM
// array.
//
// push writes in_data when the FIFO is not full; pop removes the head when
// it is not empty. The head is visible combinationally on out_data whenever
// empty is low (first-word fall-through). count is the number of words held.
// A push to a full FIFO is dropped and flagged for one clock on overflow;
// a pop from an empty FIFO is ignored. DEPTH must be a power of two.
//
// The paper stores the FFT output in block RAM configured as a FIFO; depth,
// width and the overflow flag are this design's choices.
module bram_fifo #(
  parameter int unsigned WIDTH = 64,
  parameter int unsigned DEPTH = 4096
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       push,
  input  logic [WIDTH-1:0]           in_data,
  input  logic                       pop,
  output logic [WIDTH-1:0]           out_data,
  output logic                       empty,
  output logic                       full,
  output logic [$clog2(DEPTH):0]     count,
  output logic                       overflow
);
  localparam int unsigned AW = $clog2(DEPTH);

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW:0]      wp, rp;
  logic             do_push, do_pop;

  assign empty    = (wp == rp);
  assign full     = (wp[AW-1:0] == rp[AW-1:0]) && (wp[AW] != rp[AW]);
  assign count    = wp - rp;
  assign do_push  = push && !full;
  assign do_pop   = pop && !empty;
  assign out_data = mem[rp[AW-1:0]];

  always_ff @(posedge clk) begin
    if (do_push) mem[wp[AW-1:0]] <= in_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp       <= '0;
      rp       <= '0;
      overflow <= 1'b0;
    end else begin
      if (do_push) wp <= wp + 1'b1;
      if (do_pop)  rp <= rp + 1'b1;
      overflow <= push && full;
      a_count_in_range: assert (count <= (AW+1)'(DEPTH)) else $error("FIFO count out of range");
    end
  end

endmodule
