// tb_sdp_ram: self-checking testbench for sdp_ram.
//
// Writes random words to random addresses while reading random addresses,
// and checks each read (one cycle after its address) against a shadow
// array, including the read-old-data case when reading the word being
// written.
module tb_sdp_ram;
  localparam int DEPTH = 256, DW = 40;
  logic clk = 0;
  always #5 clk = ~clk;
  logic we; logic [7:0] waddr, raddr; logic [DW-1:0] wdata, rdata;
  logic [DW-1:0] shadow [DEPTH];
  int checks = 0, failures = 0;

  sdp_ram #(.DEPTH(DEPTH), .DW(DW)) dut (.*);

  initial begin #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    logic [DW-1:0] exp_d; bit chk;
    we = 0; waddr = 0; raddr = 0; wdata = 0; chk = 0;
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk); we = 1; waddr = 8'(a); wdata = {8'($urandom), 32'($urandom)}; shadow[a] = wdata;
    end
    for (int i = 0; i < 3000; i++) begin
      @(negedge clk);
      if (chk) begin checks++; if (rdata !== exp_d) begin failures++; $display("FAIL read"); end end
      we = 1'($urandom); waddr = 8'($urandom); wdata = {8'($urandom), 32'($urandom)};
      raddr = (i % 7 == 0) ? waddr : 8'($urandom);
      exp_d = shadow[raddr]; chk = 1;
      if (we) shadow[waddr] = wdata;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
