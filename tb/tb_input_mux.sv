// tb_input_mux: self-checking testbench for input_mux.
//
// Fills the line buffer with random pixels, applies random kernel indices in
// both precisions, and checks every unit's operand word against
// rows[ky][u+kx] (saturated to a signed nibble per lane in FxP4, the raw byte
// in lane 0 for FxP8).
module tb_input_mux;
  import trea_pkg::*;
  localparam int N = 100, K = 5;
  logic [7:0] rows [K][N+K-1];
  logic [IDX_W-1:0] idx [LANES];
  prec_t prec;
  logic [15:0] data [N];
  int checks = 0, failures = 0;

  input_mux #(.N(N), .K(K)) dut (.*);

  function automatic logic [3:0] s4(logic [7:0] v);
    int iv = int'($signed(v));
    if (iv > 7) iv = 7; if (iv < -8) iv = -8;
    return 4'(iv);
  endfunction

  initial begin
    int ky [4], kx [4]; logic [15:0] e;
    #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    int ky [4], kx [4]; logic [15:0] e;
    for (int t = 0; t < 200; t++) begin
      for (int r = 0; r < K; r++) for (int c = 0; c < N + K - 1; c++) rows[r][c] = 8'($urandom);
      for (int l = 0; l < 4; l++) begin
        ky[l] = $urandom % K; kx[l] = $urandom % K; idx[l] = {3'(ky[l]), 3'(kx[l])};
      end
      prec = prec_t'(t % 2);
      #1;
      for (int u = 0; u < N; u++) begin
        if (prec == PREC4) for (int l = 0; l < 4; l++) e[4*l +: 4] = s4(rows[ky[l]][u + kx[l]]);
        else e = {8'h00, rows[ky[0]][u + kx[0]]};
        checks++;
        if (data[u] !== e) begin failures++; if (failures < 5) $display("FAIL u=%0d %h %h", u, data[u], e); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
