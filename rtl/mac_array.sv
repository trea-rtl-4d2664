// mac_array: the 1D SIMD array of DQ-MAC units.
//
// N_UNITS DQ-MACs run in lockstep. Weight word, bias, precision mode,
// truncation settings and the valid/first/last strobes are broadcast; each
// unit gets its own 16-bit operand word. In this design each unit computes one
// output pixel of the current output row, so one weight word serves the whole
// row (output-stationary, weight-broadcast dataflow). Latency and hold
// behaviour are those of dq_mac; valid_out is taken from unit 0 (all units
// are identical in timing).
//
// The 100-unit 1D organisation follows the published architecture; the
// weight-broadcast dataflow is this design's choice.
module mac_array
  import trea_pkg::*;
#(
  parameter int unsigned N = N_UNITS
) (
  input  logic              clk,
  input  logic              rst_n,
  input  prec_t             pmode,
  input  logic              valid_in,
  input  logic              first,
  input  logic              last,
  input  logic [15:0]       weight,
  input  logic [15:0]       data_in [N],
  input  logic [15:0]       bias,
  input  logic              bias_ld,
  input  logic [2:0]        trunc,
  input  logic [4:0]        out_shift,
  output logic              valid_out,
  output logic [7:0]        mac_out [N]
);
  logic [N-1:0] v;

  for (genvar u = 0; u < N; u++) begin : g_unit
    dq_mac u_mac (
      .clk, .rst_n, .pmode, .valid_in, .first, .last, .weight,
      .data_in  (data_in[u]),
      .bias, .bias_ld, .trunc, .out_shift,
      .valid_out(v[u]),
      .mac_out  (mac_out[u])
    );
  end

  assign valid_out = v[0];

  // all units share one schedule
  a_lockstep: assert property (@(posedge clk) disable iff (!rst_n) (v == '0 || v == '1));

endmodule
