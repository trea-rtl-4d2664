// tb_mac_array: self-checking testbench for mac_array at its full 100 units.
//
// Broadcasts random weight words with a different random operand word per
// unit, in both precisions, and checks every unit's mac_out against the
// exact dot product (FxP4: four signed nibble products; FxP8: one signed
// byte product) plus bias, shifted and saturated. Also checks that all
// units report together and that the result holds until the next output.
module tb_mac_array;
  import trea_pkg::*;
  localparam int N = 100;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  prec_t pmode; logic valid_in, first, last, bias_ld, valid_out;
  logic [15:0] weight, bias; logic [15:0] data_in [N]; logic [2:0] trunc; logic [4:0] out_shift;
  logic [7:0] mac_out [N];
  int checks = 0, failures = 0;

  mac_array #(.N(N)) dut (.*);

  function automatic longint dot(prec_t pm, logic [15:0] w, logic [15:0] x);
    longint s = 0;
    if (pm == PREC4) for (int l = 0; l < 4; l++) s += longint'($signed(w[4*l+:4])) * longint'($signed(x[4*l+:4]));
    else s = longint'($signed(w[7:0])) * longint'($signed(x[7:0]));
    return s;
  endfunction

  initial begin #2000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    longint acc [N]; longint sh; int nt; prec_t pm;
    pmode = PREC8; valid_in = 0; first = 0; last = 0; weight = 0; bias = 0; bias_ld = 0; trunc = 0; out_shift = 0;
    for (int u = 0; u < N; u++) data_in[u] = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int g = 0; g < 40; g++) begin
      pm = prec_t'(g % 2); nt = 1 + $urandom % 6; out_shift = 5'($urandom % 6);
      @(negedge clk); bias = 16'($signed(10'($urandom))); bias_ld = 1;
      @(negedge clk); bias_ld = 0;
      for (int u = 0; u < N; u++) acc[u] = longint'($signed(bias));
      for (int t = 0; t < nt; t++) begin
        valid_in = 1; pmode = pm; first = (t == 0); last = (t == nt - 1); weight = 16'($urandom);
        for (int u = 0; u < N; u++) begin data_in[u] = 16'($urandom); acc[u] += dot(pm, weight, data_in[u]); end
        @(negedge clk);
      end
      valid_in = 0; first = 0; last = 0;
      while (!valid_out) @(negedge clk);
      repeat (2) @(negedge clk);     // results hold
      for (int u = 0; u < N; u++) begin
        sh = acc[u] >>> out_shift;
        sh = sh > 127 ? 127 : sh < -128 ? -128 : sh;
        checks++;
        if (mac_out[u] !== 8'(sh)) begin failures++; if (failures < 5) $display("FAIL u=%0d %0d %0d", u, $signed(mac_out[u]), sh); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
