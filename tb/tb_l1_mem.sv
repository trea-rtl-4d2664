// tb_l1_mem: self-checking testbench for l1_mem.
//
// Writes random bytes at random (row, column) positions and reads whole
// rows, checking every byte of each row against a shadow copy one cycle
// after the row address.
module tb_l1_mem;
  localparam int DEPTH = 64, ROW_W = 104;
  logic clk = 0;
  always #5 clk = ~clk;
  logic we; logic [5:0] wrow, rrow; logic [6:0] wcol; logic [7:0] wdata;
  logic [7:0] rdata [ROW_W];
  logic [7:0] shadow [DEPTH][ROW_W];
  int checks = 0, failures = 0;

  l1_mem #(.DEPTH(DEPTH), .ROW_W(ROW_W)) dut (.*);

  initial begin #5000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    logic [7:0] exp_row [ROW_W]; bit chk = 0;
    we = 0; wrow = 0; rrow = 0; wcol = 0; wdata = 0;
    for (int r = 0; r < DEPTH; r++) for (int c = 0; c < ROW_W; c++) begin
      @(negedge clk); we = 1; wrow = 6'(r); wcol = 7'(c); wdata = 8'($urandom); shadow[r][c] = wdata;
    end
    for (int i = 0; i < 4000; i++) begin
      @(negedge clk);
      if (chk) for (int c = 0; c < ROW_W; c++) begin
        checks++; if (rdata[c] !== exp_row[c]) begin failures++; if (failures < 5) $display("FAIL byte %0d", c); end
      end
      we = 1'($urandom); wrow = 6'($urandom); wcol = 7'($urandom % ROW_W); wdata = 8'($urandom);
      rrow = 6'($urandom);
      exp_row = shadow[rrow]; chk = 1;
      if (we) shadow[wrow][wcol] = wdata;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
