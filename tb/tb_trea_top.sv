// tb_trea_top: end-to-end testbench of the whole accelerator at its default
// size (100-unit array, no parameter overrides).
//
// Acting as the host over AXI4-Lite it loads a random 2-channel 10x102 image,
// biases and SHARP-pruned or dense weights for a four-layer network, writes
// the layer descriptors and starts the run:
//   L0  3x3, FxP4, SHARP 4:9, 2->2 ch, ReLU, per-term truncation (trunc 3)
//   L1  5x5, FxP8, SHARP 12:25, 2->2 ch, identity, truncation (trunc 7)
//   L2  1x1, FxP4, dense, 2->2 ch, ReLU
//   L3  1x1, FxP8, dense, 2->2 ch, Sigmoid (second run: Tanh)
// A reference model written here computes every layer from its own copy of
// the image. Intermediate layers (kept in L1) are compared exactly; the last
// layer is read back from the output buffer over AXI and compared within one
// LSB against real-valued Sigmoid/Tanh. The number of MAC issue cycles per
// layer must equal out_ch*OH*in_ch*steps with the SHARP step counts
// (1, 12, 1, 1). Mechanisms counted, each must occur: FxP4 and FxP8 issues
// (precision switch), SHARP layers, per-term truncation changing a result,
// output saturation, PISO stalls, bias preloads, Compute_Done, Layer_Done,
// DNN_Done and each activation function.
module tb_trea_top;
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
  localparam int NLAY = 4;
  int L_K[NLAY]    = '{3, 5, 1, 1};
  int L_P4[NLAY]   = '{1, 0, 1, 0};
  int L_SH[NLAY]   = '{1, 1, 0, 0};
  int L_AF[NLAY]   = '{0, 3, 0, 1};
  int L_C[NLAY]    = '{2, 2, 2, 2};
  int L_M[NLAY]    = '{2, 2, 2, 2};
  int L_IB[NLAY]   = '{0, 100, 200, 300};
  int L_OB[NLAY]   = '{100, 200, 300, 400};
  int L_OS[NLAY]   = '{1, 3, 0, 2};
  int L_TR[NLAY]   = '{3, 7, 0, 0};
  int L_H[NLAY], L_W[NLAY], L_WB[NLAY], L_BB[NLAY], L_ST[NLAY];

  logic [7:0]  img [1024][ROW_W];        // reference L1
  logic [39:0] wmem [4096];
  logic [15:0] bmem [256];
  int pre_act [NLAY][2][8][100];         // reference pre-activation (mac_out)

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
      pre_act[l][m][y][x] = int'(sh);
      img[L_OB[l] + m * oh + y][x] = (L_AF[l] == 0 && sh < 0) ? 8'd0 : 8'(sh);
    end
  endtask

  initial begin #200000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  initial begin
    logic [31:0] d; int used [4]; int cpfi;
    s_axi_awaddr = 0; s_axi_awvalid = 0; s_axi_wdata = 0; s_axi_wvalid = 0; s_axi_wstrb = 0;
    s_axi_bready = 0; s_axi_araddr = 0; s_axi_arvalid = 0; s_axi_rready = 0;
    foreach (issues[i]) issues[i] = 0;
    foreach (used[i]) used[i] = 0;
    L_H[0] = 10; L_W[0] = 102;
    for (int l = 1; l < NLAY; l++) begin L_H[l] = L_H[l-1] - L_K[l-1] + 1; L_W[l] = L_W[l-1] - L_K[l-1] + 1; end
    repeat (4) @(posedge clk); rst_n = 1;

    // ---- image, weights, biases ----
    for (int r = 0; r < 1024; r++) for (int c = 0; c < ROW_W; c++) img[r][c] = '0;
    for (int c = 0; c < L_C[0]; c++) for (int y = 0; y < L_H[0]; y++) for (int x = 0; x < L_W[0]; x++) begin
      img[c * L_H[0] + y][x] = 8'($signed(4'($urandom)));
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

    for (int run = 0; run < 2; run++) begin
      int oh, ow, dd0;
      if (run == 1) begin
        L_AF[3] = 2;     // same network, last layer switched to Tanh
        axi_write(24'h000100 + 24'(32 * 3) + 16, 32'((L_AF[3] << 8) | (L_SH[3] << 5) | (L_P4[3] << 4) | L_K[3]));
        cur_layer = 0; foreach (issues[i]) issues[i] = 0;
      end
      dd0 = n_dd;
      axi_write(24'h000000, 32'd1);
      while (n_dd == dd0) @(posedge clk);
      axi_read(24'h000000, d);
      checks++; if (d[1] != 1'b1 || d[0] != 1'b0) begin failures++; $display("FAIL status %h", d); end
      axi_read(24'h000008, d); cpfi = int'(d);
      $display("run %0d: %0d clock cycles for the four-layer network", run, cpfi);
      for (int l = 0; l < NLAY; l++) begin
        checks++;
        if (issues[l] != L_M[l] * (L_H[l] - L_K[l] + 1) * L_C[l] * L_ST[l]) begin
          failures++; $display("FAIL layer %0d issues %0d", l, issues[l]);
        end
        used[L_AF[l]]++;
      end
      // intermediate layers, exact, straight from L1
      for (int l = 0; l < NLAY - 1; l++) begin
        oh = L_H[l] - L_K[l] + 1; ow = L_W[l] - L_K[l] + 1;
        for (int m = 0; m < L_M[l]; m++) for (int y = 0; y < oh; y++) for (int x = 0; x < ow; x++) begin
          checks++;
          if (dut.u_l1.mem[L_OB[l] + m * oh + y][x] !== img[L_OB[l] + m * oh + y][x]) begin
            failures++;
            if (failures < 10) $display("FAIL L%0d m%0d y%0d x%0d got %0d exp %0d", l, m, y, x,
              $signed(dut.u_l1.mem[L_OB[l] + m * oh + y][x]), $signed(img[L_OB[l] + m * oh + y][x]));
          end
        end
      end
      // last layer from the output buffer, over AXI
      oh = L_H[3]; ow = L_W[3];
      for (int m = 0; m < L_M[3]; m++) for (int y = 0; y < oh; y++) for (int x = 0; x < ow; x++) begin
        real z, f; int e, g;
        axi_read(24'h400000 + 24'(4 * ((m * oh + y) * ow + x)), d);
        z = real'(pre_act[3][m][y][x]) / 16.0;
        if (L_AF[3] == 1) f = 1.0 / (1.0 + $exp(-z));
        else f = ($exp(z) - $exp(-z)) / ($exp(z) + $exp(-z));
        e = (f >= 0) ? $rtoi(f * 16.0 + 0.5) : -$rtoi(-f * 16.0 + 0.5);
        g = int'($signed(d[7:0]));
        checks++;
        if (g - e > 1 || e - g > 1) begin failures++; if (failures < 10) $display("FAIL out m%0d y%0d x%0d got %0d exp %0d", m, y, x, g, e); end
      end
    end

    axi_read(24'h00000C, d);
    $display("mechanisms: fxp4=%0d fxp8=%0d compute_done=%0d layer_done=%0d dnn_done=%0d bias_preload=%0d stall_cycles=%0d trunc_effective=%0d saturated=%0d relu=%0d sigmoid=%0d tanh=%0d identity=%0d",
             n_p4, n_p8, n_cd, n_ld, n_dd, n_bias, d, n_trunc_eff, n_sat, used[0], used[1], used[2], used[3]);
    checks += 13;
    if (n_p4 == 0) failures++;
    if (n_p8 == 0) failures++;
    if (n_cd == 0) failures++;
    if (n_ld != 2 * NLAY) failures++;
    if (n_dd != 2) failures++;
    if (n_bias == 0) failures++;
    if (d == 0) failures++;
    if (n_trunc_eff == 0) failures++;
    if (n_sat == 0) failures++;
    if (used[0] == 0) failures++;
    if (used[1] == 0) failures++;
    if (used[2] == 0) failures++;
    if (used[3] == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
