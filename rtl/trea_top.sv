// trea_top: time-multiplexed, resource-efficient edge accelerator (top level).
//
// A host loads weights, biases, the input image and per-layer descriptors
// over AXI4-Lite, writes START, and waits for DNN_Done. The control engine
// then runs every layer on the same hardware: kernel rows go from the L1
// feature memory into a line buffer, the input mux picks for each of the 100
// DQ-MAC units the pixels its SHARP-retained weights need, and the array
// accumulates one output row (one tile) per pass. Finished rows go through a
// PISO into the single shared RQ-NAF activation core, then through a FIFO to
// the output muxing logic, which writes each result back into L1 (input of
// the next layer) and into the host-readable output buffer.
//
// Host address map (24-bit byte addresses, 32-bit words):
//   0x0xxxxx  layer parameter / control registers (see trea_regs)
//   0x1xxxxx  weight memory: word i at 0x100000 + 8*i; write the low 32 bits
//             at +0 first, then bits [39:32] at +4 (this commits the word)
//             word = {idx3, idx2, idx1, idx0, w[15:0]}, idx = {ky, kx}
//   0x2xxxxx  bias memory: word i at 0x200000 + 4*i, bits [15:0]
//   0x3xxxxx  L1: pixel (row, col) at 0x300000 + 512*row + 4*col, bits [7:0]
//   0x4xxxxx  output buffer (read): byte i at 0x400000 + 4*i, bits [7:0]
// Compute_Done, Layer_Done and DNN_Done are also brought out as pulses.
//
// Block structure and the three done signals follow the published
// architecture; memory sizes, the address map and the dataflow are this
// design's choices.
module trea_top
  import trea_pkg::*;
#(
  parameter int unsigned AW = 24
) (
  input  logic          clk,
  input  logic          rst_n,
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
  input  logic [AW-1:0] s_axi_araddr,
  input  logic          s_axi_arvalid,
  output logic          s_axi_arready,
  output logic [31:0]   s_axi_rdata,
  output logic [1:0]    s_axi_rresp,
  output logic          s_axi_rvalid,
  input  logic          s_axi_rready,
  output logic          compute_done,
  output logic          layer_done,
  output logic          dnn_done
);
  localparam int unsigned L1_AW = $clog2(L1_DEPTH);
  localparam int unsigned WB_AW = $clog2(WB_DEPTH);
  localparam int unsigned BB_AW = $clog2(BB_DEPTH);
  localparam int unsigned OB_AW = $clog2(OB_DEPTH);

  // ---------------- host port ----------------
  logic          bus_we, bus_re;
  logic [AW-1:0] bus_waddr, bus_raddr;
  logic [31:0]   bus_wdata, bus_rdata;

  axi_lite_slave #(.AW(AW)) u_axi (
    .clk, .rst_n,
    .s_axi_awaddr, .s_axi_awvalid, .s_axi_awready, .s_axi_wdata, .s_axi_wstrb, .s_axi_wvalid,
    .s_axi_wready, .s_axi_bresp, .s_axi_bvalid, .s_axi_bready, .s_axi_araddr, .s_axi_arvalid,
    .s_axi_arready, .s_axi_rdata, .s_axi_rresp, .s_axi_rvalid, .s_axi_rready,
    .bus_we, .bus_waddr, .bus_wdata, .bus_re, .bus_raddr, .bus_rdata
  );

  wire [3:0]  wreg = bus_waddr[23:20];
  wire [19:0] woff = bus_waddr[19:0];
  wire [3:0]  rreg = bus_raddr[23:20];
  wire [19:0] roff = bus_raddr[19:0];

  // ---------------- layer parameter registers ----------------
  logic        start, ce_busy;
  logic [3:0]  num_layers;
  layer_desc_t desc [NL];
  logic [31:0] reg_rdata, stall_cycles;

  trea_regs u_regs (
    .clk, .rst_n,
    .we   (bus_we && wreg == 4'h0), .waddr(woff[11:0]), .wdata(bus_wdata),
    .re   (bus_re && rreg == 4'h0), .raddr(roff[11:0]), .rdata(reg_rdata),
    .start, .num_layers, .desc, .busy(ce_busy), .dnn_done_pulse(dnn_done), .stall_cycles
  );

  // ---------------- weight and bias BRAM ----------------
  logic [31:0]       w_stage;
  logic [WB_AW-1:0]  wb_raddr;
  logic [WW_W-1:0]   wb_rdata;
  logic [BB_AW-1:0]  bb_raddr;
  logic [15:0]       bb_rdata;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) w_stage <= '0;
    else if (bus_we && wreg == 4'h1 && !woff[2]) w_stage <= bus_wdata;
  end

  sdp_ram #(.DEPTH(WB_DEPTH), .DW(WW_W)) u_wbram (
    .clk,
    .we   (bus_we && wreg == 4'h1 && woff[2]),
    .waddr(woff[WB_AW+2:3]),
    .wdata({bus_wdata[WW_W-33:0], w_stage}),
    .raddr(wb_raddr), .rdata(wb_rdata)
  );

  sdp_ram #(.DEPTH(BB_DEPTH), .DW(16)) u_bbram (
    .clk,
    .we   (bus_we && wreg == 4'h2),
    .waddr(woff[BB_AW+1:2]),
    .wdata(bus_wdata[15:0]),
    .raddr(bb_raddr), .rdata(bb_rdata)
  );

  // ---------------- L1 feature memory ----------------
  logic             wr_l1_we;
  logic [L1_AW-1:0] wr_l1_row;
  logic [6:0]       wr_l1_col;
  logic [7:0]       wr_l1_data;
  logic [L1_AW-1:0] l1_rrow;
  logic [7:0]       l1_rdata [ROW_W];
  wire              host_l1_we = bus_we && wreg == 4'h3;

  l1_mem #(.DEPTH(L1_DEPTH), .ROW_W(ROW_W)) u_l1 (
    .clk,
    .we   (wr_l1_we || host_l1_we),
    .wrow (wr_l1_we ? wr_l1_row  : woff[L1_AW+8:9]),
    .wcol (wr_l1_we ? wr_l1_col  : woff[8:2]),
    .wdata(wr_l1_we ? wr_l1_data : bus_wdata[7:0]),
    .rrow (l1_rrow),
    .rdata(l1_rdata)
  );

  // ---------------- control engine ----------------
  logic [7:0]       rows [KMAX][ROW_W];
  logic [IDX_W-1:0] idx [LANES];
  logic             mac_valid, mac_first, mac_last, bias_ld, array_valid;
  logic [15:0]      mac_weight, bias;
  logic             piso_ready, piso_load, drain_busy;
  logic [$clog2(N_UNITS+1)-1:0] piso_count;
  res_tag_t         piso_tag;
  layer_desc_t      cur;
  logic [6:0]       ow;

  trea_ce #(.L1_AW(L1_AW), .WB_AW(WB_AW), .BB_AW(BB_AW)) u_ce (
    .clk, .rst_n, .start, .num_layers, .desc,
    .l1_rrow, .l1_rdata, .wb_raddr, .wb_rdata, .bb_raddr, .bb_rdata,
    .rows, .idx, .mac_valid, .mac_first, .mac_last, .mac_weight, .bias_ld, .bias,
    .array_valid, .piso_ready, .piso_load, .piso_count, .piso_tag, .drain_busy,
    .cur, .ow, .busy(ce_busy), .compute_done, .layer_done, .dnn_done, .stall_cycles
  );

  // ---------------- input muxing and MAC array ----------------
  logic [15:0] data_in [N_UNITS];
  logic [7:0]  mac_out [N_UNITS];

  input_mux u_imux (.rows, .idx, .prec(cur.prec), .data(data_in));

  mac_array u_array (
    .clk, .rst_n, .pmode(cur.prec), .valid_in(mac_valid), .first(mac_first), .last(mac_last),
    .weight(mac_weight), .data_in, .bias, .bias_ld, .trunc(cur.trunc), .out_shift(cur.out_shift),
    .valid_out(array_valid), .mac_out
  );

  // ---------------- PISO -> RQ-NAF -> FIFO -> output muxing ----------------
  logic                         p_valid;
  logic [7:0]                   p_val;
  logic [$clog2(N_UNITS)-1:0]   p_idx;
  res_tag_t                     p_tag, p_tag_col, n_tag;
  logic                         n_valid, naf_busy;
  logic [7:0]                   n_val;

  piso #(.N(N_UNITS), .W(8), .TAG_W($bits(res_tag_t))) u_piso (
    .clk, .rst_n, .load(piso_load), .par_in(mac_out), .count(piso_count), .tag_in(piso_tag),
    .ready(piso_ready), .valid_out(p_valid), .ser_out(p_val), .idx_out(p_idx), .tag_out(p_tag)
  );

  always_comb begin
    p_tag_col     = p_tag;
    p_tag_col.col = 7'(p_idx);
  end

  rq_naf #(.TAG_W($bits(res_tag_t))) u_naf (
    .clk, .rst_n, .valid_in(p_valid), .af_sel(cur.af), .x_in(p_val), .tag_in(p_tag_col),
    .valid_out(n_valid), .y_out(n_val), .tag_out(n_tag), .busy(naf_busy)
  );

  logic        f_pop, f_full, f_empty;
  logic [38:0] f_dout;
  logic [$clog2(17)-1:0] f_level;

  sync_fifo #(.DEPTH(16), .W(39)) u_fifo (
    .clk, .rst_n, .push(n_valid), .din({n_tag, n_val}), .pop(f_pop),
    .dout(f_dout), .full(f_full), .empty(f_empty), .level(f_level)
  );

  logic             ob_we, wr_busy;
  logic [OB_AW-1:0] ob_waddr;
  logic [7:0]       ob_wdata, ob_rdata;

  out_writer #(.L1_AW(L1_AW), .OB_AW(OB_AW)) u_wr (
    .clk, .rst_n, .ow,
    .fifo_empty(f_empty), .fifo_dout(f_dout), .fifo_pop(f_pop),
    .l1_we(wr_l1_we), .l1_wrow(wr_l1_row), .l1_wcol(wr_l1_col), .l1_wdata(wr_l1_data),
    .ob_we, .ob_waddr, .ob_wdata, .busy(wr_busy)
  );

  sdp_ram #(.DEPTH(OB_DEPTH), .DW(8)) u_obuf (
    .clk, .we(ob_we), .waddr(ob_waddr), .wdata(ob_wdata),
    .raddr(roff[OB_AW+1:2]), .rdata(ob_rdata)
  );

  assign drain_busy = !piso_ready || naf_busy || wr_busy;

  // ---------------- host read mux (targets answer one cycle after bus_re) ----------------
  logic [3:0] rreg_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) rreg_q <= '0;
    else if (bus_re) rreg_q <= rreg;
  end
  always_comb begin
    unique case (rreg_q)
      4'h0:    bus_rdata = reg_rdata;
      4'h4:    bus_rdata = {24'd0, ob_rdata};
      default: bus_rdata = '0;
    endcase
  end

  // the FIFO never has to refuse a result: the writer drains one per cycle
  a_fifo_room: assert property (@(posedge clk) disable iff (!rst_n) !(n_valid && f_full));
  // write-back and host never write L1 in the same cycle
  a_l1_port:   assert property (@(posedge clk) disable iff (!rst_n) !(wr_l1_we && host_l1_we));

endmodule
