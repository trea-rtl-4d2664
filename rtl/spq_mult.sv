// spq_mult: single-precision quantised multiplier (SPQ-Mult) for one digit pair.
//
// Multiplier-free, most-significant-digit-first shift-and-add product of an
// N-bit input x and an N-bit weight w. The weight is decomposed greedily into
// signed powers of two: every pipeline stage finds the leading one of the
// weight residual |W_i| (bit e), adds or subtracts x shifted by e to the
// running product Y according to the residual's sign, and removes that power
// of two from the residual (W_{i+1} = W_i - q_i). Each shifted term has its
// `trunc` lowest bits cleared (arithmetic floor) before it is accumulated,
// which is the pre-accumulation truncation of the scheme: for a weight read
// as Q1.(N-1), trunc = N-1 keeps every term at the input's own word length,
// trunc = 0 yields the exact product. A zero residual makes a stage a no-op,
// so with STAGES >= N the untruncated product is exact.
//
// Interface: operands and their signedness (x_sgn / w_sgn; FxP8 digit
// composition uses unsigned low digits) enter with valid_in; the signed
// (2N+1)-bit product leaves with valid_out exactly STAGES cycles later, one
// new operand pair per cycle.
//
// Follows the published stage structure (shifter + add/sub per stage, sign of
// the weight residual selecting add or subtract, five stages). Leading-one
// selection per stage follows the written description rather than the fixed
// 2^-1, 2^-2, ... reference chain drawn in the pipeline diagram; the wider
// output and the run-time truncation input are this design's choices.
module spq_mult #(
  parameter int unsigned N      = 4,
  parameter int unsigned STAGES = 5
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   valid_in,
  input  logic [N-1:0]           x,
  input  logic [N-1:0]           w,
  input  logic                   x_sgn,
  input  logic                   w_sgn,
  input  logic [$clog2(N)-1:0]   trunc,
  output logic                   valid_out,
  output logic signed [2*N:0]    p
);
  localparam int unsigned PW = 2 * N + 1;   // product width
  localparam int unsigned RW = N + 1;       // residual width (signed)

  typedef struct packed {
    logic                 v;
    logic signed [RW-1:0] x;     // sign-extended input
    logic signed [RW-1:0] res;   // weight residual
    logic signed [PW-1:0] y;     // partial product
    logic [$clog2(N)-1:0] tr;
  } stage_t;

  stage_t st [STAGES+1];

  // stage 0: operand extension (combinational)
  always_comb begin
    st[0].v   = valid_in;
    st[0].x   = {x_sgn & x[N-1], x};
    st[0].res = {w_sgn & w[N-1], w};
    st[0].y   = '0;
    st[0].tr  = trunc;
  end

  // Leading-one position of a non-negative residual magnitude
  function automatic int unsigned msd_pos(input logic [RW-1:0] mag);
    int unsigned pos;
    pos = 0;
    for (int unsigned b = 0; b < RW; b++)
      if (mag[b]) pos = b;
    return pos;
  endfunction

  for (genvar s = 0; s < STAGES; s++) begin : g_stage
    stage_t               nxt;
    logic                 neg;
    logic [RW-1:0]        mag;
    int unsigned          e;
    logic signed [PW-1:0] term;

    always_comb begin
      nxt  = st[s];
      neg  = st[s].res[RW-1];
      mag  = neg ? RW'(-st[s].res) : RW'(st[s].res);
      e    = msd_pos(mag);
      term = PW'(st[s].x) <<< e;
      term = (term >>> st[s].tr) <<< st[s].tr;       // bit truncation
      if (mag != '0) begin
        nxt.y   = neg ? st[s].y - term : st[s].y + term;
        nxt.res = neg ? st[s].res + RW'(1 << e) : st[s].res - RW'(1 << e);
      end
    end

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        st[s+1] <= '0;
      end else begin
        st[s+1] <= nxt;
      end
    end
  end

  assign valid_out = st[STAGES].v;
  assign p         = st[STAGES].y;

endmodule
