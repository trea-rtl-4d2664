// tb_axi_lite_slave: self-checking testbench for axi_lite_slave.
//
// A small register file behind the internal bus (answering one cycle after
// bus_re) is written and read back through AXI4-Lite, with address and data
// beats offered in either order and response back-pressure, and every
// internal write is checked for address and data.
module tb_axi_lite_slave;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [23:0] s_axi_awaddr, s_axi_araddr, bus_waddr, bus_raddr;
  logic s_axi_awvalid, s_axi_awready, s_axi_wvalid, s_axi_wready, s_axi_bvalid, s_axi_bready;
  logic s_axi_arvalid, s_axi_arready, s_axi_rvalid, s_axi_rready, bus_we, bus_re;
  logic [31:0] s_axi_wdata, s_axi_rdata, bus_wdata, bus_rdata; logic [3:0] s_axi_wstrb;
  logic [1:0] s_axi_bresp, s_axi_rresp;
  int checks = 0, failures = 0, nwrites = 0;
  logic [31:0] rf [64];

  axi_lite_slave #(.AW(24)) dut (.*);

  always @(posedge clk) begin
    if (bus_we) begin rf[bus_waddr[7:2]] <= bus_wdata; nwrites++; end
    if (bus_re) bus_rdata <= rf[bus_raddr[7:2]] ^ 32'h5a5a_0000;
  end

  `include "axi_host.svh"

  initial begin #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    logic [31:0] shadow [64]; logic [31:0] d;
    s_axi_awaddr = 0; s_axi_awvalid = 0; s_axi_wdata = 0; s_axi_wvalid = 0; s_axi_wstrb = 0;
    s_axi_bready = 0; s_axi_araddr = 0; s_axi_arvalid = 0; s_axi_rready = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int i = 0; i < 64; i++) begin shadow[i] = $urandom; axi_write(24'(4 * i), shadow[i]); end
    // data beat before address beat
    @(negedge clk); s_axi_wdata = 32'hdead_beef; s_axi_wvalid = 1;
    repeat (3) @(negedge clk); s_axi_awaddr = 24'h0000_08; s_axi_awvalid = 1;
    while (!s_axi_awready) @(negedge clk);
    @(negedge clk); s_axi_awvalid = 0; s_axi_wvalid = 0;
    repeat (3) @(negedge clk);            // response held while not accepted
    checks++; if (!s_axi_bvalid) begin failures++; $display("FAIL bvalid dropped"); end
    s_axi_bready = 1; @(negedge clk); s_axi_bready = 0;
    shadow[2] = 32'hdead_beef;
    for (int i = 0; i < 64; i++) begin
      axi_read(24'(4 * i), d);
      checks++;
      if (d !== (shadow[i] ^ 32'h5a5a_0000)) begin failures++; $display("FAIL rd %0d %h", i, d); end
    end
    checks++; if (nwrites != 65) begin failures++; $display("FAIL write count %0d", nwrites); end
    checks++; if (s_axi_bresp != 0 || s_axi_rresp != 0) begin failures++; end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
