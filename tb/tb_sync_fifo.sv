// tb_sync_fifo: self-checking testbench for sync_fifo.
//
// Random pushes and pops (never pushing when full nor popping when empty)
// against a queue model: checks the head word, full, empty and level each
// cycle, and fills the FIFO completely once.
module tb_sync_fifo;
  localparam int DEPTH = 16, W = 39;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic push, pop, full, empty; logic [W-1:0] din, dout; logic [4:0] level;
  logic [W-1:0] q[$];
  int checks = 0, failures = 0, fulls = 0;

  sync_fifo #(.DEPTH(DEPTH), .W(W)) dut (.*);

  initial begin #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    push = 0; pop = 0; din = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int i = 0; i < 5000; i++) begin
      @(negedge clk);
      checks += 3;
      if (empty != (q.size() == 0)) begin failures++; $display("FAIL empty"); end
      if (full != (q.size() == DEPTH)) begin failures++; $display("FAIL full"); end
      if (int'(level) != q.size()) begin failures++; $display("FAIL level"); end
      if (q.size() != 0) begin checks++; if (dout !== q[0]) begin failures++; $display("FAIL head"); end end
      if (full) fulls++;
      push = (i % 1000 < 500) ? ($urandom % 4 != 0) : ($urandom % 4 == 0);
      pop  = !push ? ($urandom % 2 == 0) : ($urandom % 3 == 0);
      if (full) push = 0;
      if (empty) pop = 0;
      din = {7'($urandom), 32'($urandom)};
      if (pop) void'(q.pop_front());
      if (push) q.push_back(din);
    end
    checks++; if (fulls == 0) begin failures++; $display("FAIL never full"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
