// tb_out_writer: self-checking testbench for out_writer.
//
// Pushes tagged results into a FIFO in bursts and checks that each appears
// once, in order, as an L1 write at (l1_row, col) and an output-buffer write
// at ob_row*OW + col, one cycle after it is popped, and that busy covers the
// queued and in-flight writes.
module tb_out_writer;
  import trea_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic push, f_empty, f_full, f_pop; logic [38:0] din, f_dout; logic [4:0] level;
  logic l1_we, ob_we, busy; logic [9:0] l1_wrow; logic [6:0] l1_wcol, ow; logic [7:0] l1_wdata, ob_wdata;
  logic [12:0] ob_waddr;
  int checks = 0, failures = 0;
  logic [38:0] q[$];

  sync_fifo #(.DEPTH(16), .W(39)) u_f (.clk, .rst_n, .push, .din, .pop(f_pop), .dout(f_dout),
                                       .full(f_full), .empty(f_empty), .level);
  out_writer dut (.clk, .rst_n, .ow, .fifo_empty(f_empty), .fifo_dout(f_dout), .fifo_pop(f_pop),
                  .l1_we, .l1_wrow, .l1_wcol, .l1_wdata, .ob_we, .ob_waddr, .ob_wdata, .busy);

  always @(posedge clk) if (rst_n && l1_we) begin
    res_tag_t t; logic [7:0] v;
    {t, v} = q.pop_front();
    checks += 6;
    if (!ob_we) begin failures++; $display("FAIL ob_we"); end
    if (l1_wrow != 10'(t.l1_row)) begin failures++; $display("FAIL row"); end
    if (l1_wcol != t.col) begin failures++; $display("FAIL col"); end
    if (l1_wdata != v || ob_wdata != v) begin failures++; $display("FAIL data"); end
    if (ob_waddr != 13'(int'(t.ob_row) * int'(ow) + int'(t.col))) begin failures++; $display("FAIL ob addr"); end
    if (!busy) begin failures++; $display("FAIL busy"); end
  end

  initial begin #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    res_tag_t t;
    push = 0; din = 0; ow = 7'd98;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int b = 0; b < 50; b++) begin
      for (int i = 0; i < 1 + $urandom % 12; i++) begin
        @(negedge clk);
        t.l1_row = 12'($urandom % 1024); t.ob_row = 12'($urandom % 80); t.col = 7'($urandom % 98);
        din = {t, 8'($urandom)}; push = 1; q.push_back(din);
      end
      @(negedge clk); push = 0;
      repeat ($urandom % 4) @(negedge clk);
    end
    repeat (4) @(negedge clk);
    checks += 2;
    if (q.size() != 0) begin failures++; $display("FAIL %0d not written", q.size()); end
    if (busy) begin failures++; $display("FAIL busy at end"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
