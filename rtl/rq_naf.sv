// rq_naf: reconfigurable CORDIC-based non-linear activation core (RQ-NAF).
//
// One shared core evaluates ReLU, Sigmoid or Tanh on an 8-bit activation,
// chosen per sample by a 2-bit select, at one result per cycle with a fixed
// latency of 9 cycles. Sigmoid and Tanh come from a single hyperbolic CORDIC:
// sinh + cosh gives e^z, a second adder gives 1 + e^z, two 2:1 multiplexers
// pick (e^z, 1 + e^z) for Sigmoid or (sinh, cosh) for Tanh, and a divider
// forms the ratio. ReLU and the identity code bypass the CORDIC and are only
// delayed so that results stay in order.
//
// Stage 1 reduces the argument, z = k*ln2 + r with |r| <= ln2/2, because the
// CORDIC converges only for |z| < ~1.1. Stages 2-8 are the seven CORDIC
// iterations on r. Stage 9 rebuilds e^z = 2^k * e^r with shifts (scaling
// numerator and denominator by the same power of two), then divides.
//
// Number format: input and output are signed Q3.4 (FRAC = 4), so Sigmoid
// lies in [0, 16/16] and Tanh in [-16/16, 16/16]; results are rounded to the
// nearest LSB. Codes: 00 ReLU, 01 Sigmoid, 10 Tanh, 11 identity. A TAG_W-bit
// tag travels with each sample. `busy` is high while any sample is in flight.
//
// The adder/multiplexer/divider structure, the 9-stage depth and the 2-bit
// select follow the published description; the range reduction, the Q3.4
// format, the code assignment and the identity code are this design's own.
// The published adders are power-gated; here their operands are forced to
// zero when ReLU or identity is selected.
module rq_naf
  import trea_pkg::*;
#(
  parameter int unsigned TAG_W = 31
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              valid_in,
  input  af_t               af_sel,
  input  logic [7:0]        x_in,
  input  logic [TAG_W-1:0]  tag_in,
  output logic              valid_out,
  output logic [7:0]        y_out,
  output logic [TAG_W-1:0]  tag_out,
  output logic              busy
);
  localparam int unsigned FW      = 14;
  localparam int unsigned W       = FW + 4;
  localparam int unsigned FRAC    = 4;
  localparam int unsigned LATENCY = 9;
  // 1/ln2 and ln2 in Q.14
  localparam logic signed [17:0] INV_LN2 = 18'sd23637;
  localparam logic signed [17:0] LN2     = 18'sd11357;

  typedef struct packed {
    logic signed [4:0] k;
    af_t               af;
    logic [7:0]        x;
    logic [TAG_W-1:0]  tag;
  } sb_t;

  // ---------------- stage 1: range reduction ----------------
  logic signed [W-1:0]  zq;
  logic signed [35:0]   kprod;
  logic signed [4:0]    k_c;
  logic signed [W-1:0]  r_c;
  always_comb begin
    zq    = W'($signed(x_in)) <<< (FW - FRAC);
    kprod = 36'(zq) * 36'(INV_LN2);
    k_c   = 5'((kprod + 36'sd134217728) >>> 28);   // round(z / ln2)
    r_c   = zq - W'(36'(k_c) * 36'(LN2));
  end

  logic                s1_v;
  logic signed [W-1:0] s1_r;
  sb_t                 s1_sb;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1_v <= 1'b0; s1_r <= '0; s1_sb <= '0;
    end else begin
      s1_v  <= valid_in;
      s1_r  <= (af_sel == AF_SIGMOID || af_sel == AF_TANH) ? r_c : '0;
      s1_sb <= '{k: k_c, af: af_sel, x: x_in, tag: tag_in};
    end
  end

  // ---------------- stages 2-8: CORDIC ----------------
  logic                c_v;
  logic signed [W-1:0] c_cosh, c_sinh;
  sb_t                 c_sb;
  cordic_hyp #(.FW(FW), .SB_W($bits(sb_t))) u_cordic (
    .clk, .rst_n,
    .valid_in (s1_v),
    .z_in     (s1_r),
    .sb_in    (s1_sb),
    .valid_out(c_v),
    .cosh_out (c_cosh),
    .sinh_out (c_sinh),
    .sb_out   (c_sb)
  );

  // ---------------- stage 9: adders, muxes, division ----------------
  logic                gate;
  logic signed [W-1:0] ch, sh;
  logic [W-1:0]        e_pos, e_neg;      // e^r, e^-r   (adder: cosh +/- sinh)
  logic [W-1:0]        num_s, den_s;      // Sigmoid: e^z, 1 + e^z (scaled)
  logic [W-1:0]        ta, tb;            // Tanh: scaled e^z, e^-z
  logic [W:0]          num_t, den_t;
  logic [W+FRAC+1:0]   dnum;
  logic [W:0]          dden;
  logic                neg;
  logic [W+FRAC+1:0]   q2;
  logic [7:0]          q;
  logic [4:0]          ka, ka2;
  logic [7:0]          y_c;

  always_comb begin
    gate  = (c_sb.af == AF_SIGMOID) || (c_sb.af == AF_TANH);
    ch    = gate ? c_cosh : '0;
    sh    = gate ? c_sinh : '0;
    e_pos = W'(ch + sh);
    e_neg = W'(ch - sh);
    ka    = c_sb.k[4] ? 5'(-c_sb.k) : 5'(c_sb.k);
    ka2   = 5'({ka, 1'b0});
    // Sigmoid = e^z / (1 + e^z), numerator and denominator scaled by 2^-k when k >= 0
    if (!c_sb.k[4]) begin
      num_s = e_pos;
      den_s = e_pos + (W'(1 << FW) >> ka);
    end else begin
      num_s = e_pos >> ka;
      den_s = W'(1 << FW) + (e_pos >> ka);
    end
    // Tanh = sinh/cosh = (e^z - e^-z)/(e^z + e^-z), both scaled by 2^-|k|
    if (!c_sb.k[4]) begin
      ta = e_pos;
      tb = (ka2 >= 5'(W)) ? '0 : (e_neg >> ka2);
    end else begin
      ta = (ka2 >= 5'(W)) ? '0 : (e_pos >> ka2);
      tb = e_neg;
    end
    num_t = (ta >= tb) ? (W+1)'(ta - tb) : (W+1)'(tb - ta);
    den_t = (W+1)'(ta) + (W+1)'(tb);
    // 2:1 multiplexers in front of the divider
    if (c_sb.af == AF_TANH) begin
      dnum = (W+FRAC+2)'(num_t) << (FRAC + 1);
      dden = den_t;
      neg  = (ta < tb);
    end else begin
      dnum = (W+FRAC+2)'(num_s) << (FRAC + 1);
      dden = (W+1)'(den_s);
      neg  = 1'b0;
    end
    q2 = (dden == '0) ? '0 : dnum / (W+FRAC+2)'(dden);   // 2x the Q.4 quotient
    q  = 8'((q2 + 1'b1) >> 1);                              // round to nearest
    unique case (c_sb.af)
      AF_RELU:    y_c = c_sb.x[7] ? 8'd0 : c_sb.x;
      AF_NONE:    y_c = c_sb.x;
      default:    y_c = neg ? 8'(-q) : q;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      valid_out <= 1'b0; y_out <= '0; tag_out <= '0;
    end else begin
      valid_out <= c_v;
      y_out     <= y_c;
      tag_out   <= c_sb.tag;
    end
  end

  // in-flight tracking: stage 1, the CORDIC stages and the output register
  logic [LATENCY-1:0] vpipe;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) vpipe <= '0;
    else        vpipe <= {vpipe[LATENCY-2:0], valid_in};
  end
  assign busy = |vpipe;

endmodule
