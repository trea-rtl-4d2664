// input_mux: input muxing logic between the kernel line buffer and the array.
//
// The line buffer holds KMAX input rows of ROW_W pixels (8-bit containers).
// A weight word carries, for each SIMD lane, the kernel position {ky, kx} of
// the retained weight it holds. For MAC unit u (output column u) and lane l
// the operand is the pixel rows[ky_l][u + kx_l]. In FxP4 mode the four
// selected pixels, each saturated to a signed nibble, form the 16-bit operand
// word; in FxP8 mode lane 0's pixel fills bits [7:0]. Purely combinational.
//
// The published architecture names an input-muxing block; the line-buffer
// organisation, the index format and the nibble saturation are this
// design's choices.
module input_mux
  import trea_pkg::*;
#(
  parameter int unsigned N = N_UNITS,
  parameter int unsigned K = KMAX
) (
  input  logic [7:0]        rows [K][N+K-1],
  input  logic [IDX_W-1:0]  idx  [LANES],
  input  prec_t             prec,
  output logic [15:0]       data [N]
);
  function automatic logic [3:0] sat4(input logic [7:0] v);
    if ($signed(v) > 8'sd7)       return 4'h7;
    else if ($signed(v) < -8'sd8) return 4'h8;
    else                          return v[3:0];
  endfunction

  logic [2:0] ky [LANES];
  logic [2:0] kx [LANES];

  always_comb begin
    for (int l = 0; l < int'(LANES); l++) begin
      ky[l] = (idx[l][5:3] < 3'(K)) ? idx[l][5:3] : 3'd0;
      kx[l] = (idx[l][2:0] < 3'(K)) ? idx[l][2:0] : 3'd0;
    end
    for (int u = 0; u < int'(N); u++) begin
      if (prec == PREC4) begin
        for (int l = 0; l < int'(LANES); l++)
          data[u][4*l +: 4] = sat4(rows[ky[l]][u + int'(kx[l])]);
      end else begin
        data[u] = {8'h00, rows[ky[0]][u + int'(kx[0])]};
      end
    end
  end

endmodule
