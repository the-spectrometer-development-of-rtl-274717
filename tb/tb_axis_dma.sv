// tb_axis_dma: self-checking test of the stream-to-memory DMA.
//
// Streams 40 random words (tlast on every 8th) through the DMA into the AXI4
// memory model, which stalls awready and wready at random. Checks that word
// i lands at base + 4*(i mod 12) (a 12-word ring), holds the newest data,
// that single-beat writes are used, and the word, frame and error counters.
module tb_axis_dma;
  localparam int NW = 40, RING = 12;
  localparam logic [31:0] BASE = 32'h1000_0000;

  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;

  logic en, clear;
  logic [31:0] s_tdata;
  logic s_tlast, s_tvalid, s_tready;
  logic [31:0] m_awaddr, m_wdata;
  logic [7:0] m_awlen;
  logic [2:0] m_awsize;
  logic [1:0] m_awburst, m_bresp;
  logic m_awvalid, m_awready, m_wlast, m_wvalid, m_wready, m_bvalid, m_bready;
  logic [3:0] m_wstrb;
  logic [31:0] frames, words;
  logic error;

  axis_dma dut (.*, .base(BASE), .len(32'(RING)));
  axi_mem_model mem (.clk, .rst_n, .awaddr(m_awaddr), .awlen(m_awlen), .awvalid(m_awvalid),
    .awready(m_awready), .wdata(m_wdata), .wvalid(m_wvalid), .wready(m_wready),
    .bresp(m_bresp), .bvalid(m_bvalid), .bready(m_bready));

  int checks = 0, failures = 0;
  logic [31:0] data [NW];

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    en = 1; clear = 0; s_tvalid = 0; s_tdata = 0; s_tlast = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < NW; i++) begin
      data[i] = $urandom;
      @(negedge clk);
      s_tvalid = 1; s_tdata = data[i]; s_tlast = (i % 8 == 7);
      do @(posedge clk); while (!s_tready);
      @(negedge clk) s_tvalid = 0;
      repeat ($urandom_range(0, 2)) @(negedge clk);
    end
    repeat (20) @(posedge clk);
    for (int r = 0; r < RING; r++) begin
      int last_i;
      last_i = r;
      while (last_i + RING < NW) last_i += RING;
      checks++;
      if (!mem.mem.exists(BASE + 32'(4 * r)) || mem.mem[BASE + 32'(4 * r)] != data[last_i]) begin
        failures++; $display("ring slot %0d wrong", r);
      end
    end
    checks++;
    if (mem.mem.num() != RING) begin failures++; $display("%0d addresses written, expected %0d", mem.mem.num(), RING); end
    checks++;
    if (words != NW || mem.writes != NW) begin failures++; $display("words %0d writes %0d", words, mem.writes); end
    checks++;
    if (frames != NW / 8) begin failures++; $display("frames %0d", frames); end
    checks++;
    if (error || mem.bad_len != 0 || m_wstrb != 4'hF || m_awsize != 3'd2) begin failures++; $display("error or burst shape"); end
    // clear resets the counters
    @(negedge clk) clear = 1;
    @(negedge clk) clear = 0;
    checks++;
    if (words != 0 || frames != 0) begin failures++; $display("clear did not reset counters"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
