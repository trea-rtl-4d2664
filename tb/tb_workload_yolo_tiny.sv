// tb_workload_yolo_tiny: the first two convolution layers of a tiny YOLO
// detector, run on the full-size accelerator as far as it holds them.
//
// A tiny YOLO network starts with a 3x3 convolution from the 3 colour
// channels to 16 channels, followed (after pooling) by a 3x3 convolution
// from 16 to 32 channels. The channel counts are the usual ones for such
// detectors, not taken from the design's documentation. The 416x416 input
// does not fit the 104-byte feature rows, so the test uses a strip of 10 rows
// and 102 columns; pooling is not part of the accelerator and is left out.
//   L0  3x3, FxP8 (first layer kept at 8 bits), SHARP 4:9, 3->16, ReLU
//   L1  3x3, FxP4, SHARP 4:9, 16->32, ReLU
// The host side loads everything over AXI, starts the run and waits for
// DNN_Done. A reference model computes both layers; L0 is compared in L1
// memory; L1 is compared in L1 memory and, for the last 8192 results that
// the output buffer holds, read back over AXI; all exactly. The MAC
// issue cycles per layer must equal out_ch*OH*in_ch*steps (steps 4 and 1).
module tb_workload_yolo_tiny;
  import trea_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [23:0] s_axi_awaddr, s_axi_araddr;
  logic s_axi_awvalid, s_axi_awready, s_axi_wvalid, s_axi_wready, s_axi_bvalid, s_axi_bready;
  logic s_axi_arvalid, s_axi_arready, s_axi_rvalid, s_axi_rready;
  logic [31:0] s_axi_wdata, s_axi_rdata; logic [3:0] s_axi_wstrb; logic [1:0] s_axi_bresp, s_axi_rresp;
  logic compute_done, layer_done, dnn_done;

  trea_top dut (.*);

  `include "axi_host.svh"

  int checks = 0, failures = 0;

  // ---------------- network description ----------------
  localparam int NLAY = 2;
  int L_K[NLAY]    = '{3, 3};
  int L_P4[NLAY]   = '{0, 1};
  int L_SH[NLAY]   = '{1, 1};
  int L_AF[NLAY]   = '{0, 0};
  int L_C[NLAY]    = '{3, 16};
  int L_M[NLAY]    = '{16, 32};
  int L_IB[NLAY]   = '{0, 32};
  int L_OB[NLAY]   = '{32, 160};
  int L_OS[NLAY]   = '{6, 2};
  int L_TR[NLAY]   = '{7, 3};
  int L_H[NLAY], L_W[NLAY], L_WB[NLAY], L_BB[NLAY], L_ST[NLAY];

  logic [7:0]  img [1024][ROW_W];        // reference L1
  logic [39:0] wmem [4096];
  logic [15:0] bmem [256];
  
  // mechanism counters
  int n_p4 = 0, n_p8 = 0, n_cd = 0, n_ld = 0, n_dd = 0, n_bias = 0, n_sat = 0, n_trunc_eff = 0;
  int issues [NLAY];
  int cur_layer = 0;
  always @(posedge clk) if (rst_n) begin
    if (dut.u_ce.mac_valid) begin
      if (dut.cur.prec == PREC4) n_p4++; else n_p8++;
      issues[cur_layer]++;
    end
    if (compute_done) n_cd++;
    if (layer_done) begin n_ld++; cur_layer++; end
    if (dnn_done) n_dd++;
    if (dut.u_ce.bias_ld) n_bias++;
  end

  function automatic int steps_of(int k, int p4, int sh);
    int lanes = p4 ? 4 : 1, r = 4 * ((k * k) / 8);
    if (sh && r != 0) return r / lanes;
    return (k * k + lanes - 1) / lanes;
  endfunction

  function automatic longint floor_to(longint v, int tr);
    longint d = longint'(1) << tr;
    return (v >= 0) ? (v / d) * d : -(((-v) + d - 1) / d) * d;
  endfunction
  function automatic longint msd_prod(int xv, int wv, int tr);
    longint acc = 0; int res = wv, mag, e;
    for (int i = 0; i < 5 && res != 0; i++) begin
      mag = res < 0 ? -res : res; e = 0;
      while ((1 << (e + 1)) <= mag) e++;
      if (res < 0) begin acc -= floor_to(longint'(xv) << e, tr); res += 1 << e; end
      else         begin acc += floor_to(longint'(xv) << e, tr); res -= 1 << e; end
    end
    return acc;
  endfunction
  function automatic int sat4(logic [7:0] v);
    int iv = int'($signed(v));
    return iv > 7 ? 7 : iv < -8 ? -8 : iv;
  endfunction

  // build random weights: SHARP keeps R distinct kernel positions per kernel
  task automatic build_weights();
    int wp = 0, bp = 0;
    for (int l = 0; l < NLAY; l++) begin
      int k = L_K[l], lanes = L_P4[l] ? 4 : 1, st = steps_of(L_K[l], L_P4[l], L_SH[l]);
      L_ST[l] = st; L_WB[l] = wp; L_BB[l] = bp;
      for (int m = 0; m < L_M[l]; m++) begin
        bmem[bp] = 16'($signed(6'($urandom))); bp++;
        for (int c = 0; c < L_C[l]; c++) begin
          int pos [25]; int npos;
          for (int i = 0; i < k * k; i++) pos[i] = i;
          if (L_SH[l]) for (int i = k * k - 1; i > 0; i--) begin
            int j = $urandom % (i + 1), t = pos[i]; pos[i] = pos[j]; pos[j] = t;
          end
          npos = L_SH[l] ? 4 * ((k * k) / 8) : k * k;
          for (int s = 0; s < st; s++) begin
            logic [39:0] wd = '0;
            for (int ln = 0; ln < lanes; ln++) begin
              int i = s * lanes + ln;
              if (i < npos) begin
                wd[16 + 6 * ln +: 6] = {3'(pos[i] / k), 3'(pos[i] % k)};
                if (lanes == 4) wd[4 * ln +: 4] = 4'($urandom);
                else            wd[7:0]         = 8'($urandom);
              end
            end
            wmem[wp] = wd; wp++;
          end
        end
      end
    end
  endtask

  // reference for one layer: fills pre_act and writes the activated result to img
  task automatic ref_layer(int l);
    int k = L_K[l], oh = L_H[l] - L_K[l] + 1, ow = L_W[l] - L_K[l] + 1;
    for (int m = 0; m < L_M[l]; m++) for (int y = 0; y < oh; y++) for (int x = 0; x < ow; x++) begin
      longint acc = longint'($signed(bmem[L_BB[l] + m])), sh, acc_exact = acc;
      for (int c = 0; c < L_C[l]; c++) for (int s = 0; s < L_ST[l]; s++) begin
        logic [39:0] wd = wmem[L_WB[l] + (m * L_C[l] + c) * L_ST[l] + s];
        for (int ln = 0; ln < (L_P4[l] ? 4 : 1); ln++) begin
          int ky = int'(wd[16 + 6 * ln + 3 +: 3]), kx = int'(wd[16 + 6 * ln +: 3]);
          logic [7:0] px = img[L_IB[l] + c * L_H[l] + y + ky][x + kx];
          if (L_P4[l]) begin
            int wv = int'($signed(wd[4 * ln +: 4]));
            acc += msd_prod(sat4(px), wv, L_TR[l] > 3 ? 3 : L_TR[l]);
            acc_exact += longint'(sat4(px)) * wv;
          end else begin
            acc += floor_to(longint'($signed(px)) * longint'($signed(wd[7:0])), L_TR[l]);
            acc_exact += longint'($signed(px)) * longint'($signed(wd[7:0]));
          end
        end
      end
      if (acc != acc_exact) n_trunc_eff++;
      sh = acc >>> L_OS[l];
      if (sh > 127 || sh < -128) n_sat++;
      sh = sh > 127 ? 127 : sh < -128 ? -128 : sh;
      img[L_OB[l] + m * oh + y][x] = (L_AF[l] == 0 && sh < 0) ? 8'd0 : 8'(sh);
    end
  endtask

  initial begin #200000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  initial begin
    logic [31:0] d; int oh, ow;
    s_axi_awaddr = 0; s_axi_awvalid = 0; s_axi_wdata = 0; s_axi_wvalid = 0; s_axi_wstrb = 0;
    s_axi_bready = 0; s_axi_araddr = 0; s_axi_arvalid = 0; s_axi_rready = 0;
    foreach (issues[i]) issues[i] = 0;
    L_H[0] = 10; L_W[0] = 102;
    for (int l = 1; l < NLAY; l++) begin L_H[l] = L_H[l-1] - L_K[l-1] + 1; L_W[l] = L_W[l-1] - L_K[l-1] + 1; end
    repeat (4) @(posedge clk); rst_n = 1;

    for (int r = 0; r < 1024; r++) for (int c = 0; c < ROW_W; c++) img[r][c] = '0;
    for (int c = 0; c < L_C[0]; c++) for (int y = 0; y < L_H[0]; y++) for (int x = 0; x < L_W[0]; x++) begin
      img[c * L_H[0] + y][x] = 8'($signed(6'($urandom)));
      axi_write(24'h300000 + 24'(512 * (c * L_H[0] + y) + 4 * x), 32'(img[c * L_H[0] + y][x]));
    end
    build_weights();
    for (int i = 0; i < L_WB[NLAY-1] + L_M[NLAY-1] * L_C[NLAY-1] * L_ST[NLAY-1]; i++) begin
      axi_write(24'h100000 + 24'(8 * i), wmem[i][31:0]);
      axi_write(24'h100004 + 24'(8 * i), 32'(wmem[i][39:32]));
    end
    for (int i = 0; i < L_BB[NLAY-1] + L_M[NLAY-1]; i++) axi_write(24'h200000 + 24'(4 * i), 32'(bmem[i]));
    for (int l = 0; l < NLAY; l++) begin
      axi_write(24'h000100 + 24'(32 * l) + 0,  32'(L_W[l]));
      axi_write(24'h000100 + 24'(32 * l) + 4,  32'(L_H[l]));
      axi_write(24'h000100 + 24'(32 * l) + 8,  32'(L_C[l]));
      axi_write(24'h000100 + 24'(32 * l) + 12, 32'(L_M[l]));
      axi_write(24'h000100 + 24'(32 * l) + 16, 32'((L_AF[l] << 8) | (L_SH[l] << 5) | (L_P4[l] << 4) | L_K[l]));
      axi_write(24'h000100 + 24'(32 * l) + 20, 32'((L_OB[l] << 16) | L_IB[l]));
      axi_write(24'h000100 + 24'(32 * l) + 24, 32'((L_BB[l] << 16) | L_WB[l]));
      axi_write(24'h000100 + 24'(32 * l) + 28, 32'((L_TR[l] << 8) | L_OS[l]));
    end
    axi_write(24'h000004, NLAY);
    for (int l = 0; l < NLAY; l++) ref_layer(l);

    axi_write(24'h000000, 32'd1);
    while (n_dd == 0) @(posedge clk);
    axi_read(24'h000008, d);
    $display("two layers: %0d clock cycles, %0d MAC issue cycles", d, n_p4 + n_p8);
    for (int l = 0; l < NLAY; l++) begin
      checks++;
      if (issues[l] != L_M[l] * (L_H[l] - L_K[l] + 1) * L_C[l] * L_ST[l]) begin
        failures++; $display("FAIL layer %0d issues %0d", l, issues[l]);
      end
    end
    oh = L_H[0] - 2; ow = L_W[0] - 2;
    for (int m = 0; m < L_M[0]; m++) for (int y = 0; y < oh; y++) for (int x = 0; x < ow; x++) begin
      checks++;
      if (dut.u_l1.mem[L_OB[0] + m * oh + y][x] !== img[L_OB[0] + m * oh + y][x]) begin
        failures++; if (failures < 10) $display("FAIL L0 m%0d y%0d x%0d", m, y, x);
      end
    end
    // L1 holds the whole layer; the 8192-byte output buffer keeps the last
    // 8192 results of the layer (addresses wrap), read back over AXI
    oh = L_H[1] - 2; ow = L_W[1] - 2;
    for (int m = 0; m < L_M[1]; m++) for (int y = 0; y < oh; y++) for (int x = 0; x < ow; x++) begin
      checks++;
      if (dut.u_l1.mem[L_OB[1] + m * oh + y][x] !== img[L_OB[1] + m * oh + y][x]) begin
        failures++; if (failures < 10) $display("FAIL L1 m%0d y%0d x%0d", m, y, x);
      end
    end
    for (int i = L_M[1] * oh * ow - OB_DEPTH; i < L_M[1] * oh * ow; i++) begin
      int m, y, x;
      m = i / (oh * ow); y = (i / ow) % oh; x = i % ow;
      axi_read(24'h400000 + 24'(4 * (i % OB_DEPTH)), d);
      checks++;
      if (d[7:0] !== img[L_OB[1] + m * oh + y][x]) begin
        failures++; if (failures < 10) $display("FAIL OB m%0d y%0d x%0d got %0d exp %0d", m, y, x, d[7:0], img[L_OB[1] + m * oh + y][x]);
      end
    end
    $display("truncation changed %0d sums, %0d outputs saturated", n_trunc_eff, n_sat);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
