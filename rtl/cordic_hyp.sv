// cordic_hyp: pipelined hyperbolic CORDIC in rotation mode.
//
// Computes cosh(z) and sinh(z) for |z| < ~1.1 with one iteration per pipeline
// stage. The X and Y registers start at 1/K_h and 0 so that the CORDIC gain is
// cancelled; each stage rotates by +/-atanh(2^-i) towards z = 0 using only
// shifts and adds. The iteration sequence is i = 1,2,3,4,4,5,6 (i = 4 is
// repeated, as hyperbolic CORDIC requires for convergence).
//
// Numbers are signed fixed point with FW fraction bits in FW+4 bits. A
// sideband word of SB_W bits travels with each sample. Latency ITER cycles,
// one new angle per cycle.
//
// The CORDIC block of the activation core follows the published figure; the
// iteration count, word length and rotation-mode initialisation are this
// design's choices (seven iterations fill the nine-stage core together with
// one range-reduction stage and one output stage).
module cordic_hyp #(
  parameter int unsigned FW   = 14,
  parameter int unsigned SB_W = 8
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   valid_in,
  input  logic signed [FW+3:0]   z_in,
  input  logic [SB_W-1:0]        sb_in,
  output logic                   valid_out,
  output logic signed [FW+3:0]   cosh_out,
  output logic signed [FW+3:0]   sinh_out,
  output logic [SB_W-1:0]        sb_out
);
  localparam int unsigned W    = FW + 4;
  localparam int unsigned ITER = 7;

  // shift amount of iteration s
  function automatic int unsigned sh(input int unsigned s);
    return (s < 4) ? s + 1 : s;
  endfunction

  // atanh(2^-i) scaled by 2^FW:  atanh(x) = 0.5*ln((1+x)/(1-x))
  function automatic logic signed [W-1:0] atanh_c(input int unsigned i);
    real t, a;
    t = 1.0 / real'(1 << i);
    a = 0.5 * $ln((1.0 + t) / (1.0 - t));
    return W'($rtoi(a * real'(1 << FW) + 0.5));
  endfunction

  // 1/K_h with K_h = prod sqrt(1 - 2^-2i) over the iteration sequence
  function automatic logic signed [W-1:0] inv_gain();
    real g, t;
    g = 1.0;
    for (int unsigned s = 0; s < ITER; s++) begin
      t = 1.0 / real'(1 << sh(s));
      g = g * $sqrt(1.0 - t * t);
    end
    return W'($rtoi(real'(1 << FW) / g + 0.5));
  endfunction

  localparam logic signed [W-1:0] X0 = inv_gain();

  typedef struct packed {
    logic                v;
    logic signed [W-1:0] x;
    logic signed [W-1:0] y;
    logic signed [W-1:0] z;
    logic [SB_W-1:0]     sb;
  } cst_t;

  cst_t st [ITER+1];

  always_comb begin
    st[0].v  = valid_in;
    st[0].x  = X0;
    st[0].y  = '0;
    st[0].z  = z_in;
    st[0].sb = sb_in;
  end

  for (genvar s = 0; s < ITER; s++) begin : g_it
    localparam int unsigned              SH = sh(s);
    localparam logic signed [W-1:0]      AT = atanh_c(SH);
    cst_t nxt;
    always_comb begin
      nxt = st[s];
      if (!st[s].z[W-1]) begin
        nxt.x = st[s].x + (st[s].y >>> SH);
        nxt.y = st[s].y + (st[s].x >>> SH);
        nxt.z = st[s].z - AT;
      end else begin
        nxt.x = st[s].x - (st[s].y >>> SH);
        nxt.y = st[s].y - (st[s].x >>> SH);
        nxt.z = st[s].z + AT;
      end
    end
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) st[s+1] <= '0;
      else        st[s+1] <= nxt;
    end
  end

  assign valid_out = st[ITER].v;
  assign cosh_out  = st[ITER].x;
  assign sinh_out  = st[ITER].y;
  assign sb_out    = st[ITER].sb;

endmodule
