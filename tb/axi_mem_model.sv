// axi_mem_model: behavioural AXI4 write-only slave memory standing in for
// DDR4 in the testbenches.
//
// Accepts single-beat writes (address and data in any order), stores the
// 32-bit words in an associative array by byte address and answers OKAY.
// awready and wready are dropped at random (one clock in three on average)
// to exercise the master's handshake; bvalid comes one clock after both
// halves of a write have been accepted. Counts the writes it received.
module axi_mem_model (
  input  logic        clk,
  input  logic        rst_n,
  input  logic [31:0] awaddr,
  input  logic [7:0]  awlen,
  input  logic        awvalid,
  output logic        awready,
  input  logic [31:0] wdata,
  input  logic        wvalid,
  output logic        wready,
  output logic [1:0]  bresp,
  output logic        bvalid,
  input  logic        bready
);
  logic [31:0] mem [logic [31:0]];
  logic [31:0] a_q, d_q;
  bit          have_a = 0, have_d = 0;
  int          writes = 0;
  int          bad_len = 0;

  assign bresp = 2'b00;

  always @(negedge clk) begin
    awready <= !have_a && ($urandom_range(0, 2) != 0);
    wready  <= !have_d && ($urandom_range(0, 2) != 0);
  end

  always @(posedge clk) begin
    if (!rst_n) begin
      bvalid <= 0; have_a = 0; have_d = 0;
    end else begin
      if (bvalid && bready) bvalid <= 0;
      if (awvalid && awready) begin a_q = awaddr; have_a = 1; if (awlen != 0) bad_len++; end
      if (wvalid && wready)   begin d_q = wdata;  have_d = 1; end
      if (have_a && have_d && !bvalid) begin
        mem[a_q] = d_q;
        writes++;
        have_a = 0; have_d = 0;
        bvalid <= 1;
      end
    end
  end
endmodule
