// axis_dma: stream-to-memory DMA (S2MM) from the spectrum stream into DDR4.
//
// Each 32-bit AXI4-Stream word is written to memory with one single-beat
// AXI4 write (AWLEN = 0, 4-byte beats, all strobes set) at
//   base + 4 * idx,  idx = 0 .. len-1, wrapping to 0 (ring buffer).
// The address and data phases are issued together; the next word is taken
// only after the write response, so one write is outstanding at a time
// (three clocks per word with a zero-wait slave). A word with tlast counts
// a frame once its response is back. A non-OKAY response sets error.
// When en is low no new word is taken; a write in flight completes. Setting
// clear resets the ring index and the counters.
//
// The paper routes the spectra through a DMA into DDR4 and gives the stream
// width of 32 bits. The single-beat writes, ring buffer and counters are
// this design's choices; the data rate after integration is low (4096 words
// per navg frames of 4096 clocks), so bursts are not needed.
module axis_dma #(
  parameter int unsigned ADDR_W = 32
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               en,
  input  logic               clear,
  input  logic [ADDR_W-1:0]  base,
  input  logic [31:0]        len,          // ring length in words (0 counts as 1)
  // stream in
  input  logic [31:0]        s_tdata,
  input  logic               s_tlast,
  input  logic               s_tvalid,
  output logic               s_tready,
  // AXI4 write channels
  output logic [ADDR_W-1:0]  m_awaddr,
  output logic [7:0]         m_awlen,
  output logic [2:0]         m_awsize,
  output logic [1:0]         m_awburst,
  output logic               m_awvalid,
  input  logic               m_awready,
  output logic [31:0]        m_wdata,
  output logic [3:0]         m_wstrb,
  output logic               m_wlast,
  output logic               m_wvalid,
  input  logic               m_wready,
  input  logic [1:0]         m_bresp,
  input  logic               m_bvalid,
  output logic               m_bready,
  // status
  output logic [31:0]        frames,
  output logic [31:0]        words,
  output logic               error
);
  typedef enum logic [1:0] {IDLE, WRITE, RESP} state_t;
  state_t      state;
  logic [31:0] idx;
  logic        aw_done, w_done, cur_last;

  assign m_awlen   = 8'd0;
  assign m_awsize  = 3'd2;
  assign m_awburst = 2'b01;
  assign m_wstrb   = 4'hF;
  assign m_wlast   = 1'b1;
  assign m_awvalid = (state == WRITE) && !aw_done;
  assign m_wvalid  = (state == WRITE) && !w_done;
  assign m_bready  = (state == RESP);
  assign s_tready  = (state == IDLE) && en && !clear;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= IDLE;
      idx      <= '0;
      aw_done  <= 1'b0;
      w_done   <= 1'b0;
      cur_last <= 1'b0;
      m_awaddr <= '0;
      m_wdata  <= '0;
      frames   <= '0;
      words    <= '0;
      error    <= 1'b0;
    end else begin
      case (state)
        IDLE: if (s_tvalid && s_tready) begin
          m_awaddr <= base + ADDR_W'(idx << 2);
          m_wdata  <= s_tdata;
          cur_last <= s_tlast;
          aw_done  <= 1'b0;
          w_done   <= 1'b0;
          idx      <= (idx + 1 >= ((len == 0) ? 32'd1 : len)) ? '0 : idx + 1;
          state    <= WRITE;
        end
        WRITE: begin
          if (m_awready) aw_done <= 1'b1;
          if (m_wready)  w_done  <= 1'b1;
          if ((aw_done || m_awready) && (w_done || m_wready)) state <= RESP;
        end
        RESP: if (m_bvalid) begin
          state <= IDLE;
          words <= words + 1;
          if (cur_last) frames <= frames + 1;
          if (m_bresp != 2'b00) error <= 1'b1;
        end
        default: state <= IDLE;
      endcase
      if (clear && state == IDLE) begin
        idx    <= '0;
        frames <= '0;
        words  <= '0;
        error  <= 1'b0;
      end
    end
  end

  // AXI rule: a valid address or data beat stays stable until accepted.
  logic        awv_q, wv_q;
  logic [ADDR_W-1:0] awaddr_q;
  logic [31:0] wdata_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      awv_q <= 1'b0; wv_q <= 1'b0; awaddr_q <= '0; wdata_q <= '0;
    end else begin
      awv_q <= m_awvalid && !m_awready;
      wv_q  <= m_wvalid && !m_wready;
      awaddr_q <= m_awaddr;
      wdata_q  <= m_wdata;
      if (awv_q) a_aw_stable: assert (m_awvalid && m_awaddr == awaddr_q) else $error("AW changed before accepted");
      if (wv_q)  a_w_stable:  assert (m_wvalid && m_wdata == wdata_q) else $error("W changed before accepted");
    end
  end
endmodule
