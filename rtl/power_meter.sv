// power_meter: mean-square power of one coupler ADC over a window.
//
// In calibration mode two ADCs sample the incident and the reflected wave at
// the directional couplers; the ratio of their powers gives the reflection
// coefficient. This block sums x^2 over the LANES samples of every clock for
// window clocks, then latches the 64-bit sum into power, pulses done and
// starts the next window. The sum of window*LANES squares divided by that
// count is the mean-square amplitude in LSB^2; the division and the ratio
// are left to software. While en is low the sum and the window counter are
// held at zero. window = 0 counts as 1.
//
// The paper states only what the two ADCs measure; the sum-of-squares
// detector and its window are this design's choices.
module power_meter #(
  parameter int unsigned LANES = spec_pkg::LANES,
  parameter int unsigned IN_W  = spec_pkg::ADC_W
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     en,
  input  logic [31:0]              window,
  input  logic                     in_valid,
  input  logic signed [IN_W-1:0]   in_data [LANES],
  output logic [63:0]              power,
  output logic                     done
);
  logic [63:0] acc;
  logic [31:0] cnt;
  logic [31:0] last_cnt;

  assign last_cnt = (window == 0) ? 32'd0 : window - 1;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc   <= '0;
      cnt   <= '0;
      power <= '0;
      done  <= 1'b0;
    end else begin
      done <= 1'b0;
      if (!en) begin
        acc <= '0;
        cnt <= '0;
      end else if (in_valid) begin
        logic [63:0] s;
        s = acc;
        for (int p = 0; p < int'(LANES); p++) begin
          logic signed [2*IN_W-1:0] sq;
          sq = in_data[p] * in_data[p];
          s += 64'(unsigned'(sq));
        end
        if (cnt == last_cnt) begin
          power <= s;
          done  <= 1'b1;
          acc   <= '0;
          cnt   <= '0;
        end else begin
          acc <= s;
          cnt <= cnt + 1;
        end
      end
    end
  end
endmodule
