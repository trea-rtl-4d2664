// trea_regs: layer-parameter (flag) registers and control/status.
//
// Host-visible registers on the internal bus (word offsets in bytes):
//   0x000  CTRL/STATUS  write bit0 = start; read {cfg_err, dnn_done, busy}
//   0x004  NUM_LAYERS   number of descriptors to run (1..NL)
//   0x008  CYCLES       clock cycles of the last run, start to DNN_Done
//   0x00C  STALLS       cycles the control engine waited on the PISO
//   0x100 + 0x20*l + 4*f   descriptor f of layer l:
//     f0 in_w[6:0]   f1 in_h[7:0]   f2 in_ch[7:0]   f3 out_ch[7:0]
//     f4 {af[9:8], sharp[5], prec4[4], k[2:0]}
//     f5 {out_base[27:16], in_base[11:0]}
//     f6 {b_base[23:16], w_base[11:0]}
//     f7 {trunc[10:8], out_shift[4:0]}
// Writes take effect at the clock edge; reads return data the cycle after
// `re`. `start` is a one-cycle pulse. dnn_done is sticky until the next start.
//
// The published architecture keeps the layer parameters in flag registers
// inside the control engine; this register map is this design's own.
module trea_regs
  import trea_pkg::*;
(
  input  logic          clk,
  input  logic          rst_n,
  input  logic          we,
  input  logic [11:0]   waddr,
  input  logic [31:0]   wdata,
  input  logic          re,
  input  logic [11:0]   raddr,
  output logic [31:0]   rdata,
  // to / from the control engine
  output logic          start,
  output logic [3:0]    num_layers,
  output layer_desc_t   desc [NL],
  input  logic          busy,
  input  logic          dnn_done_pulse,
  input  logic [31:0]   stall_cycles
);
  logic [31:0] f [NL][8];
  logic        done_q;
  logic [31:0] cycles;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      start <= 1'b0; num_layers <= 4'd1; done_q <= 1'b0; cycles <= '0;
      for (int l = 0; l < int'(NL); l++)
        for (int i = 0; i < 8; i++) f[l][i] <= '0;
    end else begin
      start <= we && waddr == 12'h000 && wdata[0];
      if (we && waddr == 12'h004) num_layers <= wdata[3:0];
      if (we && waddr[11:8] == 4'h1 && 32'(waddr[7:5]) < NL)
        f[waddr[7:5]][waddr[4:2]] <= wdata;
      if (start) begin done_q <= 1'b0; cycles <= '0; end
      else if (busy) cycles <= cycles + 1'b1;
      if (dnn_done_pulse) done_q <= 1'b1;
    end
  end

  always_comb begin
    for (int l = 0; l < int'(NL); l++) begin
      desc[l].in_w      = f[l][0][6:0];
      desc[l].in_h      = f[l][1][7:0];
      desc[l].in_ch     = f[l][2][7:0];
      desc[l].out_ch    = f[l][3][7:0];
      desc[l].k         = f[l][4][2:0];
      desc[l].prec      = f[l][4][4] ? PREC4 : PREC8;
      desc[l].sharp     = f[l][4][5];
      desc[l].af        = af_t'(f[l][4][9:8]);
      desc[l].in_base   = f[l][5][11:0];
      desc[l].out_base  = f[l][5][27:16];
      desc[l].w_base    = f[l][6][11:0];
      desc[l].b_base    = f[l][6][23:16];
      desc[l].out_shift = f[l][7][4:0];
      desc[l].trunc     = f[l][7][10:8];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) rdata <= '0;
    else if (re) begin
      unique casez (raddr)
        12'h000: rdata <= {29'd0, (num_layers == 0 || 32'(num_layers) > NL), done_q, busy};
        12'h004: rdata <= {28'd0, num_layers};
        12'h008: rdata <= cycles;
        12'h00C: rdata <= stall_cycles;
        12'h1??: rdata <= (32'(raddr[7:5]) < NL) ? f[raddr[7:5]][raddr[4:2]] : '0;
        default: rdata <= '0;
      endcase
    end
  end

endmodule
