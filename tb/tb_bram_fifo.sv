// tb_bram_fifo: self-checking test of the synchronous FIFO.
//
// Random pushes and pops on an 8-deep FIFO are mirrored in a queue here;
// every clock the head, empty, full and count outputs are compared with the
// queue, and a push to a full FIFO must raise overflow and be dropped.
module tb_bram_fifo;
  localparam int DEPTH = 8;

  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;

  logic push, pop, empty, full, overflow;
  logic [15:0] in_data, out_data;
  logic [3:0] count;

  bram_fifo #(.WIDTH(16), .DEPTH(DEPTH)) dut (.*);

  int checks = 0, failures = 0, full_hits = 0, ovf_hits = 0;
  logic [15:0] q [$];

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    push = 0; pop = 0; in_data = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 2000; i++) begin
      bit was_full;
      @(negedge clk);
      checks++;
      if (empty != (q.size() == 0) || full != (q.size() == DEPTH) || int'(count) != q.size() ||
          (q.size() > 0 && out_data != q[0])) begin
        failures++; $display("cycle %0d: empty %0d full %0d count %0d head %h, model size %0d", i, empty, full, count, out_data, q.size());
      end
      // bias towards filling in the first half, draining in the second
      push = ($urandom_range(0, 99) < ((i / 250) % 2 == 0 ? 70 : 30));
      pop  = ($urandom_range(0, 99) < ((i / 250) % 2 == 0 ? 30 : 70));
      in_data = 16'($urandom);
      was_full = (q.size() == DEPTH);
      if (was_full) full_hits++;
      @(posedge clk);
      if (pop && q.size() > 0) void'(q.pop_front());
      if (push && !was_full) q.push_back(in_data);
      @(negedge clk);
      if (push && was_full) begin
        checks++;
        ovf_hits++;
        if (!overflow) begin failures++; $display("no overflow flag"); end
      end
      @(posedge clk);
      push = 0; pop = 0;
    end
    checks++;
    if (full_hits == 0 || ovf_hits == 0) begin failures++; $display("full state never reached"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
