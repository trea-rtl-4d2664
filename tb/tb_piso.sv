// tb_piso: self-checking testbench for piso.
//
// Loads random rows with random valid counts and checks that exactly `count`
// values come out, one per cycle, in index order with the right tag, that
// ready is low while serialising and high again afterwards, and that a load
// offered while busy is only accepted once ready.
module tb_piso;
  localparam int N = 100;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic load, ready, valid_out;
  logic [7:0] par_in [N]; logic [6:0] count, idx_out; logic [23:0] tag_in, tag_out;
  logic [7:0] ser_out;
  int checks = 0, failures = 0;

  piso #(.N(N), .W(8), .TAG_W(24)) dut (.*);

  initial begin #2000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  initial begin
    logic [7:0] ref_row [N]; int cnt, got;
    load = 0; count = 0; tag_in = 0;
    for (int i = 0; i < N; i++) par_in[i] = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int r = 0; r < 40; r++) begin
      @(negedge clk);
      cnt = 1 + $urandom % N;
      for (int i = 0; i < N; i++) begin par_in[i] = 8'($urandom); ref_row[i] = par_in[i]; end
      count = 7'(cnt); tag_in = 24'(r); load = 1;
      checks++; if (!ready) begin failures++; $display("FAIL not ready"); end
      @(negedge clk); load = 0;
      for (int i = 0; i < N; i++) par_in[i] = 8'($urandom);   // must not disturb the copy
      got = 0;
      while (valid_out) begin
        checks += 4;
        if (ser_out != ref_row[got]) begin failures++; $display("FAIL value %0d", got); end
        if (idx_out != 7'(got)) begin failures++; $display("FAIL idx"); end
        if (tag_out != 24'(r)) begin failures++; $display("FAIL tag"); end
        if (ready) begin failures++; $display("FAIL ready while busy"); end
        // a load attempt while busy would be an assertion failure: keep load low
        got++;
        @(negedge clk);
      end
      checks += 2;
      if (got != cnt) begin failures++; $display("FAIL got %0d of %0d", got, cnt); end
      if (!ready) begin failures++; $display("FAIL not ready after"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
