// axi_lite_slave: AXI4-Lite slave port of the accelerator.
//
// Converts host AXI4-Lite transactions into a simple internal bus. A write
// needs both the address and the data beat (accepted in either order); it
// then appears as a one-cycle bus_we pulse and is answered with an OKAY
// write response. A read issues a one-cycle bus_re pulse; the addressed
// target must return bus_rdata in the next cycle, which is then presented on
// the R channel. One transaction of each kind is outstanding at a time.
// Byte strobes are ignored (every target takes whole words).
//
// The host connects over AXI in the published architecture; the AXI4-Lite
// subset and the internal bus are this design's choices.
module axi_lite_slave #(
  parameter int unsigned AW = 24
) (
  input  logic          clk,
  input  logic          rst_n,
  // AXI4-Lite write address / data / response
  input  logic [AW-1:0] s_axi_awaddr,
  input  logic          s_axi_awvalid,
  output logic          s_axi_awready,
  input  logic [31:0]   s_axi_wdata,
  input  logic [3:0]    s_axi_wstrb,
  input  logic          s_axi_wvalid,
  output logic          s_axi_wready,
  output logic [1:0]    s_axi_bresp,
  output logic          s_axi_bvalid,
  input  logic          s_axi_bready,
  // AXI4-Lite read address / data
  input  logic [AW-1:0] s_axi_araddr,
  input  logic          s_axi_arvalid,
  output logic          s_axi_arready,
  output logic [31:0]   s_axi_rdata,
  output logic [1:0]    s_axi_rresp,
  output logic          s_axi_rvalid,
  input  logic          s_axi_rready,
  // internal bus
  output logic          bus_we,
  output logic [AW-1:0] bus_waddr,
  output logic [31:0]   bus_wdata,
  output logic          bus_re,
  output logic [AW-1:0] bus_raddr,
  input  logic [31:0]   bus_rdata
);
  logic          aw_have, w_have, rd_wait;
  logic [AW-1:0] aw_q;
  logic [31:0]   w_q;

  assign s_axi_awready = !aw_have;
  assign s_axi_wready  = !w_have;
  assign s_axi_bresp   = 2'b00;
  assign s_axi_rresp   = 2'b00;
  assign s_axi_arready = !rd_wait && !s_axi_rvalid;

  assign bus_we    = aw_have && w_have && !s_axi_bvalid;
  assign bus_waddr = aw_q;
  assign bus_wdata = w_q;
  assign bus_re    = s_axi_arvalid && s_axi_arready;
  assign bus_raddr = s_axi_araddr;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      aw_have <= 1'b0; w_have <= 1'b0; aw_q <= '0; w_q <= '0;
      s_axi_bvalid <= 1'b0;
      rd_wait <= 1'b0; s_axi_rvalid <= 1'b0; s_axi_rdata <= '0;
    end else begin
      // write path
      if (s_axi_awvalid && s_axi_awready) begin aw_have <= 1'b1; aw_q <= s_axi_awaddr; end
      if (s_axi_wvalid && s_axi_wready)   begin w_have  <= 1'b1; w_q  <= s_axi_wdata;  end
      if (bus_we) begin
        s_axi_bvalid <= 1'b1;
        aw_have <= 1'b0;
        w_have  <= 1'b0;
      end
      if (s_axi_bvalid && s_axi_bready) s_axi_bvalid <= 1'b0;
      // read path
      if (bus_re) rd_wait <= 1'b1;
      if (rd_wait) begin
        rd_wait      <= 1'b0;
        s_axi_rvalid <= 1'b1;
        s_axi_rdata  <= bus_rdata;
      end
      if (s_axi_rvalid && s_axi_rready) s_axi_rvalid <= 1'b0;
    end
  end

  // AXI rule: a response, once valid, stays valid until accepted
  a_bvalid_hold: assert property (@(posedge clk) disable iff (!rst_n)
                   s_axi_bvalid && !s_axi_bready |=> s_axi_bvalid);
  a_rvalid_hold: assert property (@(posedge clk) disable iff (!rst_n)
                   s_axi_rvalid && !s_axi_rready |=> s_axi_rvalid && $stable(s_axi_rdata));

  logic unused;
  assign unused = ^s_axi_wstrb;

endmodule
