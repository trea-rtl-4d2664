// Host-side AXI4-Lite tasks shared by the testbenches. The including module
// must declare clk and the s_axi_* signals with the slave's names.
task automatic axi_write(input logic [23:0] addr, input logic [31:0] data);
  @(negedge clk);
  s_axi_awaddr = addr; s_axi_awvalid = 1; s_axi_wdata = data; s_axi_wvalid = 1; s_axi_wstrb = 4'hf;
  s_axi_bready = 1;
  do @(posedge clk); while (!(s_axi_awready && s_axi_wready));
  @(negedge clk); s_axi_awvalid = 0; s_axi_wvalid = 0;
  while (!s_axi_bvalid) @(negedge clk);
  @(negedge clk); s_axi_bready = 0;
endtask

task automatic axi_read(input logic [23:0] addr, output logic [31:0] data);
  @(negedge clk);
  s_axi_araddr = addr; s_axi_arvalid = 1; s_axi_rready = 1;
  do @(posedge clk); while (!s_axi_arready);
  @(negedge clk); s_axi_arvalid = 0;
  while (!s_axi_rvalid) @(negedge clk);
  data = s_axi_rdata;
  @(negedge clk); s_axi_rready = 0;
endtask
