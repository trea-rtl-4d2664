// trea_ce: control engine (tiling, scheduling and address generation).
//
// Runs a network layer by layer on the one MAC array (time-multiplexed
// layers). For layer l it reads descriptor l and loops
//   output channel m  >  output row y (one tile = one row of OW <= N outputs)
//     >  input channel c  >  weight step s
// For each tile it reads the channel's bias and loads it into the array
// (before the first term, so no extra accumulation cycle), then for every
// input channel loads the K kernel rows from L1 into the line buffer (one row
// per cycle) and streams the channel's weight words, one per cycle. The
// number of words per channel follows SHARP: with pruning R = 4*floor(K*K/8)
// weights are kept (4 of 9, 12 of 25), taking R/4 cycles in FxP4 and R in
// FxP8; unpruned layers take ceil(K*K/lanes). Each weight word is read one
// cycle ahead of its MAC issue.
//
// After the tile's last term the engine waits for the array result, hands the
// row to the PISO (waiting, and counting stall cycles, while the PISO still
// serialises the previous row) and pulses Compute_Done. After the last tile of
// a layer it waits until PISO, activation core, FIFO and write-back are
// empty, pulses Layer_Done and moves to the next layer; after the last layer
// it pulses DNN_Done. Stride 1 and no padding: OH = H-K+1, OW = W-K+1.
//
// Addresses: L1 row of input pixel row = in_base + c*H + y + r; weight word
// = w_base + (m*C + c)*steps + s; bias word = b_base + m; output L1 row =
// out_base + m*OH + y.
//
// The three done signals, tiling/scheduling, address generation and layer
// flag registers follow the published control engine; loop order, tile shape
// and addressing are this design's choices.
module trea_ce
  import trea_pkg::*;
#(
  parameter int unsigned N     = N_UNITS,
  parameter int unsigned K     = KMAX,
  parameter int unsigned L1_AW = 10,
  parameter int unsigned WB_AW = 12,
  parameter int unsigned BB_AW = 8
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  input  logic [3:0]           num_layers,
  input  layer_desc_t          desc [NL],
  // L1 read (line-buffer load)
  output logic [L1_AW-1:0]     l1_rrow,
  input  logic [7:0]           l1_rdata [N+K-1],
  // weight and bias memories
  output logic [WB_AW-1:0]     wb_raddr,
  input  logic [WW_W-1:0]      wb_rdata,
  output logic [BB_AW-1:0]     bb_raddr,
  input  logic [15:0]          bb_rdata,
  // line buffer and kernel indices to the input mux
  output logic [7:0]           rows [K][N+K-1],
  output logic [IDX_W-1:0]     idx  [LANES],
  // MAC array control
  output logic                 mac_valid,
  output logic                 mac_first,
  output logic                 mac_last,
  output logic [15:0]          mac_weight,
  output logic                 bias_ld,
  output logic [15:0]          bias,
  input  logic                 array_valid,
  // PISO hand-off
  input  logic                 piso_ready,
  output logic                 piso_load,
  output logic [$clog2(N+1)-1:0] piso_count,
  output res_tag_t             piso_tag,
  input  logic                 drain_busy,
  // current layer settings
  output layer_desc_t          cur,
  output logic [6:0]           ow,
  // status
  output logic                 busy,
  output logic                 compute_done,
  output logic                 layer_done,
  output logic                 dnn_done,
  output logic [31:0]          stall_cycles
);
  typedef enum logic [2:0] {S_IDLE, S_SETUP, S_BIAS, S_BIASLD, S_LOAD, S_STEP, S_WAIT, S_HAND} st_t;
  typedef enum logic [1:0] {D_NONE, D_DRAIN} dr_t;

  st_t         st;
  dr_t         dr;
  logic [3:0]  l;
  logic [7:0]  m, y, c, oh;
  logic [2:0]  r;
  logic [4:0]  s, steps;
  logic [11:0] wptr, wm_base;
  logic        ld_v;
  logic [2:0]  ld_r;
  logic        iss_v, iss_first, iss_last;

  // ---------------- address generation ----------------
  always_comb begin
    l1_rrow  = L1_AW'(cur.in_base + 12'(c) * 12'(cur.in_h) + 12'(y) + 12'(r));
    wb_raddr = WB_AW'(wptr);
    bb_raddr = BB_AW'(cur.b_base + m);
  end

  // ---------------- scheduler ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; dr <= D_NONE; l <= '0; m <= '0; y <= '0; c <= '0; r <= '0; s <= '0;
      oh <= '0; ow <= '0; steps <= '0; wptr <= '0; wm_base <= '0; cur <= '0;
      ld_v <= 1'b0; ld_r <= '0; iss_v <= 1'b0; iss_first <= 1'b0; iss_last <= 1'b0;
      bias_ld <= 1'b0; piso_load <= 1'b0; piso_count <= '0; piso_tag <= '0;
      compute_done <= 1'b0; layer_done <= 1'b0; dnn_done <= 1'b0; stall_cycles <= '0;
    end else begin
      ld_v <= 1'b0; iss_v <= 1'b0; bias_ld <= 1'b0; piso_load <= 1'b0;
      compute_done <= 1'b0; layer_done <= 1'b0; dnn_done <= 1'b0;
      if (start && st == S_IDLE) stall_cycles <= '0;
      unique case (st)
        S_IDLE: if (start && num_layers != '0) begin l <= '0; st <= S_SETUP; end
        S_SETUP: begin
          cur     <= desc[l[2:0]];
          oh      <= desc[l[2:0]].in_h - 8'(desc[l[2:0]].k) + 8'd1;
          ow      <= desc[l[2:0]].in_w - 7'(desc[l[2:0]].k) + 7'd1;
          steps   <= steps_for(desc[l[2:0]].k, desc[l[2:0]].prec, desc[l[2:0]].sharp);
          m <= '0; y <= '0;
          wm_base <= desc[l[2:0]].w_base;
          st      <= S_BIAS;
        end
        S_BIAS: st <= S_BIASLD;                  // bias word being read
        S_BIASLD: begin
          bias_ld <= 1'b1;
          c <= '0; r <= '0; wptr <= wm_base;
          st <= S_LOAD;
        end
        S_LOAD: begin
          ld_v <= 1'b1; ld_r <= r;
          if (r == cur.k - 3'd1) begin r <= '0; s <= '0; st <= S_STEP; end
          else r <= r + 3'd1;
        end
        S_STEP: begin
          iss_v     <= 1'b1;
          iss_first <= (c == 8'd0) && (s == 5'd0);
          iss_last  <= (c == cur.in_ch - 8'd1) && (s == steps - 5'd1);
          wptr      <= wptr + 12'd1;
          if (s == steps - 5'd1) begin
            s <= '0;
            if (c == cur.in_ch - 8'd1) st <= S_WAIT;
            else begin c <= c + 8'd1; st <= S_LOAD; end
          end else s <= s + 5'd1;
        end
        S_WAIT: if (array_valid) st <= S_HAND;
        S_HAND: begin
          if (piso_ready) begin
            piso_load    <= 1'b1;
            piso_count   <= ($clog2(N+1))'(ow);
            piso_tag     <= '{l1_row: cur.out_base + 12'(m) * 12'(oh) + 12'(y),
                              ob_row: 12'(m) * 12'(oh) + 12'(y),
                              col:    '0};
            compute_done <= 1'b1;
            if (y == oh - 8'd1) begin
              y <= '0;
              wm_base <= wm_base + 12'(cur.in_ch) * 12'(steps);
              if (m == cur.out_ch - 8'd1) begin st <= S_IDLE; dr <= D_DRAIN; end
              else begin m <= m + 8'd1; st <= S_BIAS; end
            end else begin
              y <= y + 8'd1; st <= S_BIAS;
            end
          end else begin
            stall_cycles <= stall_cycles + 32'd1;
          end
        end
        default: st <= S_IDLE;
      endcase
      // layer drain: wait for PISO, activation core, FIFO and write-back
      if (dr == D_DRAIN && !piso_load && piso_ready && !drain_busy) begin
        layer_done <= 1'b1;
        if (32'(l) + 1 == 32'(num_layers)) begin
          dr <= D_NONE; dnn_done <= 1'b1;
        end else begin
          dr <= D_NONE; l <= l + 4'd1; st <= S_SETUP;
        end
      end
    end
  end

  // ---------------- line buffer ----------------
  always_ff @(posedge clk) begin
    if (ld_v) rows[ld_r] <= l1_rdata;
  end

  // ---------------- MAC issue (weight word arrives one cycle after its read) ----------------
  always_comb begin
    mac_valid  = iss_v;
    mac_first  = iss_first;
    mac_last   = iss_last;
    mac_weight = wb_rdata[15:0];
    bias       = bb_rdata;
    for (int i = 0; i < int'(LANES); i++) idx[i] = wb_rdata[16 + IDX_W*i +: IDX_W];
  end

  assign busy = (st != S_IDLE) || (dr != D_NONE);

  a_tile_fits: assert property (@(posedge clk) disable iff (!rst_n)
                 st == S_HAND |-> 32'(ow) <= N);

endmodule
