// tb_trea_ce: self-checking testbench of the control engine.
//
// The engine (8-unit array) runs a three-layer network against memory models
// with the same one-cycle registered reads as the real memories: L1 row r
// holds bytes r*3+j, weight word i holds a recognisable pattern, bias word i
// holds 1000+i. The MAC array is modelled as a 9-cycle delay from the last
// term to array_valid, and the PISO as busy for a programmable time after each
// load. The testbench checks, independently of the engine:
//   - each tile issues in_ch*steps weight words (SHARP: 1 / 12 per channel,
//     dense FxP4 3x3: 3, FxP8 1x1: 1), one per cycle within a channel;
//   - weight order w_base+(m*C+c)*steps+s, kernel indices, line-buffer rows
//     in_base+c*H+y+r, first/last flags and bias value per tile;
//   - PISO hand-off count (OW) and tag (destination row), one per tile;
//   - Compute_Done per tile, Layer_Done per layer, one DNN_Done;
//   - stall cycles: none with a fast PISO, some with a slow one.
module tb_trea_ce;
  import trea_pkg::*;
  localparam int N = 8, K = KMAX;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start = 0; logic [3:0] num_layers;
  layer_desc_t desc [NL];
  logic [9:0] l1_rrow; logic [7:0] l1_rdata [N+K-1];
  logic [11:0] wb_raddr; logic [WW_W-1:0] wb_rdata;
  logic [7:0] bb_raddr; logic [15:0] bb_rdata;
  logic [7:0] rows [K][N+K-1]; logic [IDX_W-1:0] idx [LANES];
  logic mac_valid, mac_first, mac_last, bias_ld; logic [15:0] mac_weight, bias;
  logic array_valid = 0, piso_ready, piso_load, drain_busy;
  logic [$clog2(N+1)-1:0] piso_count; res_tag_t piso_tag;
  layer_desc_t cur; logic [6:0] ow;
  logic busy, compute_done, layer_done, dnn_done; logic [31:0] stall_cycles;

  trea_ce #(.N(N)) dut (.*);

  int checks = 0, failures = 0;
  task automatic chk(bit ok, string msg);
    checks++; if (!ok) begin failures++; if (failures < 15) $display("FAIL %s", msg); end
  endtask

  function automatic logic [WW_W-1:0] wword(int i);
    return {24'(i * 40503 + 17), 16'(i * 7 + 3)};
  endfunction

  // memory models (registered reads)
  always_ff @(posedge clk) begin
    for (int j = 0; j < N + K - 1; j++) l1_rdata[j] <= 8'(int'(l1_rrow) * 3 + j);
    wb_rdata <= wword(int'(wb_raddr));
    bb_rdata <= 16'(1000 + int'(bb_raddr));
  end
  // array model: result valid 9 cycles after the last term
  logic [8:0] av_sr = '0;
  always_ff @(posedge clk) begin av_sr <= {av_sr[7:0], mac_valid & mac_last}; array_valid <= av_sr[8]; end
  // PISO model
  int piso_time = 2, piso_left = 0;
  assign piso_ready = (piso_left == 0);
  assign drain_busy = !piso_ready;
  always_ff @(posedge clk) if (piso_load) piso_left <= piso_time; else if (piso_left > 0) piso_left <= piso_left - 1;

  // network
  localparam int NLAY = 3;
  int L_K[NLAY]  = '{3, 5, 1};
  int L_P4[NLAY] = '{1, 0, 0};
  int L_SH[NLAY] = '{1, 1, 0};
  int L_C[NLAY]  = '{3, 2, 2};
  int L_M[NLAY]  = '{2, 2, 3};
  int L_H[NLAY]  = '{9, 7, 3};
  int L_W[NLAY]  = '{10, 12, 8};
  int L_ST[NLAY] = '{1, 12, 1};
  int L_IB[NLAY] = '{0, 40, 80};
  int L_OB[NLAY] = '{40, 80, 120};
  int L_WB[NLAY] = '{5, 100, 300};
  int L_BB[NLAY] = '{3, 20, 50};

  // ---- monitor: expected issue sequence ----
  int lay = 0, m = 0, y = 0, c = 0, s = 0;       // position of the next expected issue
  int run_len = 0, n_cd = 0, n_ld = 0, n_dd = 0, n_load = 0, exp_tiles = 0, tile_issues = 0;
  int exp_m_bias = 0;
  bit in_run = 0;
  always @(posedge clk) if (rst_n) begin
    if (bias_ld) chk(bias == 16'(1000 + L_BB[lay] + m), $sformatf("bias L%0d m%0d got %0d", lay, m, bias));
    if (mac_valid) begin
      automatic int wa = L_WB[lay] + (m * L_C[lay] + c) * L_ST[lay] + s;
      automatic logic [WW_W-1:0] wd = wword(wa);
      chk(mac_weight == wd[15:0], $sformatf("weight L%0d m%0d y%0d c%0d s%0d got %0d exp %0d wa %0d", lay, m, y, c, s, mac_weight, wd[15:0], wa));
      for (int l = 0; l < LANES; l++) chk(idx[l] == wd[16 + IDX_W * l +: IDX_W], "idx");
      for (int r = 0; r < L_K[lay]; r++) for (int j = 0; j < N + K - 1; j++)
        chk(rows[r][j] == 8'((L_IB[lay] + c * L_H[lay] + y + r) * 3 + j), $sformatf("row L%0d r%0d j%0d", lay, r, j));
      chk(mac_first == (c == 0 && s == 0), "first");
      chk(mac_last == (c == L_C[lay] - 1 && s == L_ST[lay] - 1), "last");
      run_len++; tile_issues++;
      if (++s == L_ST[lay]) begin
        s = 0;
        chk(run_len == L_ST[lay], $sformatf("channel run length %0d", run_len));
        if (++c == L_C[lay]) begin
          c = 0;
          chk(tile_issues == L_C[lay] * L_ST[lay], "tile issues");
          tile_issues = 0;
          if (++y == L_H[lay] - L_K[lay] + 1) begin y = 0; if (++m == L_M[lay]) begin m = 0; lay++; end end
        end
      end
    end else run_len = 0;
    if (piso_load) begin
      n_load++;
      chk(piso_ready, "load while PISO busy");
      chk(int'(piso_count) == L_W[lay > 0 && m == 0 && y == 0 && c == 0 ? lay - 1 : lay] - L_K[lay > 0 && m == 0 && y == 0 && c == 0 ? lay - 1 : lay] + 1, "piso count");
    end
    if (compute_done) n_cd++;
    if (layer_done) n_ld++;
    if (dnn_done) n_dd++;
  end

  // hand-off tags checked in order
  int tq_l = 0, tq_m = 0, tq_y = 0;
  always @(posedge clk) if (rst_n && piso_load) begin
    automatic int oh = L_H[tq_l] - L_K[tq_l] + 1;
    chk(piso_tag.l1_row == 12'(L_OB[tq_l] + tq_m * oh + tq_y), $sformatf("tag L%0d m%0d y%0d", tq_l, tq_m, tq_y));
    chk(piso_tag.ob_row == 12'(tq_m * oh + tq_y), "ob_row");
    if (++tq_y == oh) begin tq_y = 0; if (++tq_m == L_M[tq_l]) begin tq_m = 0; tq_l++; end end
  end

  initial begin #3000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  initial begin
    int st0;
    num_layers = NLAY;
    foreach (desc[i]) desc[i] = '0;
    for (int l = 0; l < NLAY; l++) begin
      desc[l].in_w = 7'(L_W[l]); desc[l].in_h = 8'(L_H[l]); desc[l].in_ch = 8'(L_C[l]); desc[l].out_ch = 8'(L_M[l]);
      desc[l].k = 3'(L_K[l]); desc[l].prec = L_P4[l] ? PREC4 : PREC8; desc[l].sharp = L_SH[l] != 0;
      desc[l].in_base = 12'(L_IB[l]); desc[l].out_base = 12'(L_OB[l]);
      desc[l].w_base = 12'(L_WB[l]); desc[l].b_base = 8'(L_BB[l]);
      chk(int'(steps_for(3'(L_K[l]), L_P4[l] ? PREC4 : PREC8, L_SH[l] != 0)) == L_ST[l], "steps_for");
      exp_tiles += L_M[l] * (L_H[l] - L_K[l] + 1);
    end
    repeat (3) @(posedge clk); rst_n <= 1;
    for (int run = 0; run < 2; run++) begin
      piso_time = run == 0 ? 2 : 60;
      lay = 0; m = 0; y = 0; c = 0; s = 0; tq_l = 0; tq_m = 0; tq_y = 0;
      n_cd = 0; n_ld = 0; n_dd = 0; n_load = 0; st0 = int'(stall_cycles);
      @(posedge clk); start <= 1; @(posedge clk); start <= 0;
      while (n_dd == 0) @(posedge clk);
      repeat (5) @(posedge clk);
      chk(lay == NLAY, $sformatf("all layers issued (%0d)", lay));
      chk(n_cd == exp_tiles, $sformatf("compute_done %0d/%0d", n_cd, exp_tiles));
      chk(n_load == exp_tiles, "piso loads");
      chk(n_ld == NLAY, "layer_done");
      chk(n_dd == 1, "dnn_done");
      chk(!busy, "idle after DNN_Done");
      if (run == 0) chk(int'(stall_cycles) == st0, "no stall with a fast PISO");
      else          chk(int'(stall_cycles) > st0, "stalls with a slow PISO");
      $display("run %0d: stall cycles %0d", run, int'(stall_cycles) - st0);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
