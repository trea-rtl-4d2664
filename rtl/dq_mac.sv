// dq_mac: dual-precision (4/8-bit) SIMD quantised MAC unit (DQ-MAC).
//
// Four SPQ-Mult lanes share one datapath. In FxP4 mode (pmode = PREC4) every
// lane multiplies its own signed 4-bit input and weight nibble and the four
// products are summed, i.e. a 4-term dot product per cycle. In FxP8 mode the
// same lanes form the four digit products of one 8-bit x 8-bit product,
//   x*w = xL*wL + (xH*wL + xL*wH)*16 + xH*wH*256   (low digits unsigned),
// which two shift&add blocks and a final adder combine. The sum enters a
// (16+ACC_K)-bit accumulator that is preloaded with the bias on the first
// term of an output (no separate bias cycle). On the last term the
// accumulator is bit-truncated to 8 bits (arithmetic shift by out_shift,
// then saturation) and presented on mac_out with valid_out.
//
// Pre-accumulation truncation: in FxP4 every lane drops `trunc` (max 3) LSBs
// of each shifted term; in FxP8 the lanes are exact and the composed 16-bit
// product drops `trunc` LSBs before it is accumulated.
//
// Timing: one operand word per cycle. valid_in/first/last enter with the
// operands; mac_out appears STAGES + 4 clock edges after the edge that
// takes `last` (input reg, STAGES lane stages, sum reg, accumulator, output
// reg). The
// bias must be loaded (bias_ld) before the first term reaches the
// accumulator; mac_out holds until the next output.
//
// Lane/shift&add/add/accumulator/bit-trunc structure, Pmode and the port
// names follow the published block diagram; the FxP8 digit composition with
// unsigned low digits, the accumulator width and the saturation are this
// design's choices.
module dq_mac
  import trea_pkg::*;
#(
  parameter int unsigned STAGES = 5,
  parameter int unsigned ACC_K  = 8,
  parameter int unsigned BIAS_W = 16
) (
  input  logic               clk,
  input  logic               rst_n,
  input  prec_t              pmode,
  input  logic               valid_in,
  input  logic               first,
  input  logic               last,
  input  logic [15:0]        weight,
  input  logic [15:0]        data_in,
  input  logic [BIAS_W-1:0]  bias,
  input  logic               bias_ld,
  input  logic [2:0]         trunc,
  input  logic [4:0]         out_shift,
  output logic               valid_out,
  output logic [7:0]         mac_out
);
  localparam int unsigned ACC_W = 16 + ACC_K;

  // ---------------- input and weight registers ----------------
  logic        r_v, r_first, r_last;
  prec_t       r_mode;
  logic [15:0] r_w, r_x;
  logic [2:0]  r_trunc;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      r_v <= 1'b0; r_first <= 1'b0; r_last <= 1'b0; r_mode <= PREC8;
      r_w <= '0; r_x <= '0; r_trunc <= '0;
    end else begin
      r_v <= valid_in;
      if (valid_in) begin
        r_first <= first; r_last <= last; r_mode <= pmode;
        r_w <= weight; r_x <= data_in; r_trunc <= trunc;
      end
    end
  end

  // ---------------- four SPQ-Mult lanes ----------------
  logic [3:0] lx [4];
  logic [3:0] lw [4];
  logic       lxs [4];
  logic       lws [4];
  logic [1:0] ltr;
  logic              lv   [4];
  logic signed [8:0] lp   [4];

  always_comb begin
    ltr = (r_mode == PREC4) ? ((r_trunc > 3'd3) ? 2'd3 : r_trunc[1:0]) : 2'd0;
    if (r_mode == PREC4) begin
      for (int l = 0; l < 4; l++) begin
        lx[l] = r_x[4*l +: 4]; lw[l] = r_w[4*l +: 4];
        lxs[l] = 1'b1; lws[l] = 1'b1;
      end
    end else begin
      // lane0: xL*wL   lane1: xH*wL   lane2: xL*wH   lane3: xH*wH
      lx[0] = r_x[3:0]; lw[0] = r_w[3:0]; lxs[0] = 1'b0; lws[0] = 1'b0;
      lx[1] = r_x[7:4]; lw[1] = r_w[3:0]; lxs[1] = 1'b1; lws[1] = 1'b0;
      lx[2] = r_x[3:0]; lw[2] = r_w[7:4]; lxs[2] = 1'b0; lws[2] = 1'b1;
      lx[3] = r_x[7:4]; lw[3] = r_w[7:4]; lxs[3] = 1'b1; lws[3] = 1'b1;
    end
  end

  for (genvar l = 0; l < 4; l++) begin : g_lane
    spq_mult #(.N(4), .STAGES(STAGES)) u_mult (
      .clk, .rst_n,
      .valid_in (r_v),
      .x        (lx[l]),
      .w        (lw[l]),
      .x_sgn    (lxs[l]),
      .w_sgn    (lws[l]),
      .trunc    (ltr),
      .valid_out(lv[l]),
      .p        (lp[l])
    );
  end

  // control travelling alongside the lanes
  logic [STAGES-1:0] d_first, d_last;
  prec_t             d_mode [STAGES];
  logic [2:0]        d_trunc [STAGES];
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      d_first <= '0; d_last <= '0;
      for (int i = 0; i < int'(STAGES); i++) begin d_mode[i] <= PREC8; d_trunc[i] <= '0; end
    end else begin
      d_first <= {d_first[STAGES-2:0], r_first};
      d_last  <= {d_last[STAGES-2:0],  r_last};
      d_mode[0] <= r_mode; d_trunc[0] <= r_trunc;
      for (int i = 1; i < int'(STAGES); i++) begin
        d_mode[i] <= d_mode[i-1]; d_trunc[i] <= d_trunc[i-1];
      end
    end
  end

  // ---------------- shift & add, add, truncation ----------------
  logic signed [15:0] sa_a, sa_b, psum;
  always_comb begin
    if (d_mode[STAGES-1] == PREC4) begin
      sa_a = 16'(lp[0]) + 16'(lp[1]);
      sa_b = 16'(lp[2]) + 16'(lp[3]);
      psum = sa_a + sa_b;
    end else begin
      sa_a = 16'(lp[0]) + (16'(lp[1]) <<< 4);
      sa_b = (16'(lp[2]) + (16'(lp[3]) <<< 4)) <<< 4;
      psum = sa_a + sa_b;
      psum = (psum >>> d_trunc[STAGES-1]) <<< d_trunc[STAGES-1];
    end
  end

  logic                    s_v, s_first, s_last;
  logic signed [15:0]      s_sum;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s_v <= 1'b0; s_first <= 1'b0; s_last <= 1'b0; s_sum <= '0;
    end else begin
      s_v     <= lv[0];
      s_first <= d_first[STAGES-1];
      s_last  <= d_last[STAGES-1];
      s_sum   <= psum;
    end
  end

  // ---------------- bias register and accumulator ----------------
  logic signed [ACC_W-1:0] bias_reg, acc, acc_nxt;
  logic                    a_last_v;
  always_comb acc_nxt = (s_first ? bias_reg : acc) + ACC_W'(s_sum);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      bias_reg <= '0; acc <= '0; a_last_v <= 1'b0;
    end else begin
      if (bias_ld) bias_reg <= ACC_W'($signed(bias));
      if (s_v) acc <= acc_nxt;
      a_last_v <= s_v & s_last;
    end
  end

  // ---------------- bit-trunc ----------------
  logic signed [ACC_W-1:0] shifted;
  always_comb shifted = acc >>> out_shift;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      valid_out <= 1'b0; mac_out <= '0;
    end else begin
      valid_out <= a_last_v;
      if (a_last_v) begin
        if (shifted > ACC_W'(127))       mac_out <= 8'sd127;
        else if (shifted < -ACC_W'(128)) mac_out <= -8'sd128;
        else                             mac_out <= shifted[7:0];
      end
    end
  end

endmodule
