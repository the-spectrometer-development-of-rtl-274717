// wave_lut: look-up table of the calibration waveform.
//
// A DEPTH x 14-bit table, written one word at a time from the processing
// system (wr_en, wr_addr, wr_data), is played out cyclically from address 0
// to len-1, one sample per clock (256 MSPS) while en is high; out_valid
// follows en by one clock and the read is registered. When en drops the
// read pointer returns to 0. After configuration the table holds one period
// of a full-scale sine over all DEPTH entries (so len = DEPTH gives a
// 62.5 kHz tone); len = 0 counts as DEPTH.
//
// The paper says the DAC waveform comes from a LUT of predefined patterns.
// The depth, the write port and the initial content are this design's
// choices.
module wave_lut #(
  parameter int unsigned DEPTH = 4096,
  parameter int unsigned W     = spec_pkg::DAC_W
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       en,
  input  logic [$clog2(DEPTH):0]     len,
  input  logic                       wr_en,
  input  logic [$clog2(DEPTH)-1:0]   wr_addr,
  input  logic signed [W-1:0]        wr_data,
  output logic                       out_valid,
  output logic signed [W-1:0]        out_data
);
  localparam int unsigned AW = $clog2(DEPTH);

  logic signed [W-1:0] mem [DEPTH];
  logic [AW-1:0]       rd;
  logic [AW:0]         len_eff;

  initial begin
    for (int i = 0; i < int'(DEPTH); i++)
      mem[i] = W'(int'($sin(2.0 * 3.14159265358979 * real'(i) / real'(DEPTH)) * real'((1 << (W - 1)) - 1)));
  end

  assign len_eff = (len == '0 || len > (AW+1)'(DEPTH)) ? (AW+1)'(DEPTH) : len;

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd        <= '0;
      out_valid <= 1'b0;
      out_data  <= '0;
    end else begin
      out_valid <= en;
      if (en) begin
        out_data <= mem[rd];
        rd       <= ((AW+1)'(rd) + 1'b1 >= len_eff) ? '0 : rd + 1'b1;
      end else begin
        rd <= '0;
      end
    end
  end
endmodule
