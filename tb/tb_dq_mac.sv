// tb_dq_mac: self-checking testbench for dq_mac.
//
// Runs random outputs of 1 to 8 terms in both precisions with random bias,
// pre-accumulation truncation and output window, one term per cycle, and
// compares mac_out with a reference computed here: FxP4 = bias + sum over
// terms of the four nibble products (each shifted power-of-two term floored
// to 2^trunc), FxP8 = bias + sum of the exact 8x8 products floored to
// 2^trunc; then arithmetic shift by out_shift and saturation to 8 bits.
// Also checks the latency (STAGES + 4 edges from the last term) and that
// outputs issued back to back come out one per group without gaps.
module tb_dq_mac;
  import trea_pkg::*;
  localparam int STAGES = 5, LAT = STAGES + 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  prec_t pmode; logic valid_in, first, last, bias_ld, valid_out;
  logic [15:0] weight, data_in, bias; logic [2:0] trunc; logic [4:0] out_shift;
  logic [7:0] mac_out;
  int checks = 0, failures = 0, cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  dq_mac #(.STAGES(STAGES)) dut (.*);

  function automatic longint floor_to(longint v, int tr);
    longint d = longint'(1) << tr;
    return (v >= 0) ? (v / d) * d : -(((-v) + d - 1) / d) * d;
  endfunction

  // greedy MSD power-of-two product with per-term flooring
  function automatic longint msd_prod(int xv, int wv, int tr);
    longint acc = 0; int res = wv, mag, e;
    for (int i = 0; i < STAGES && res != 0; i++) begin
      mag = res < 0 ? -res : res; e = 0;
      while ((1 << (e + 1)) <= mag) e++;
      if (res < 0) begin acc -= floor_to(longint'(xv) << e, tr); res += 1 << e; end
      else         begin acc += floor_to(longint'(xv) << e, tr); res -= 1 << e; end
    end
    return acc;
  endfunction

  function automatic longint term_ref(prec_t pm, logic [15:0] w, logic [15:0] x, int tr);
    longint s = 0;
    if (pm == PREC4) begin
      for (int l = 0; l < 4; l++)
        s += msd_prod(int'($signed(x[4*l+:4])), int'($signed(w[4*l+:4])), tr > 3 ? 3 : tr);
      return s;
    end
    return floor_to(longint'($signed(x[7:0])) * longint'($signed(w[7:0])), tr);
  endfunction

  int exp_q[$], cyc_q[$];
  always @(posedge clk) if (rst_n && valid_out) begin
    int e, c0;
    e = exp_q.pop_front(); c0 = cyc_q.pop_front();
    checks++;
    if (mac_out !== 8'(e)) begin failures++; $display("FAIL mac_out=%0d exp=%0d", $signed(mac_out), e); end
    checks++;
    if (cyc - c0 != LAT) begin failures++; $display("FAIL latency %0d", cyc - c0); end
  end

  initial begin
    #2000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic run_group(prec_t pm, int nterms, logic [15:0] b, bit back_to_back);
    longint acc; longint sh;
    @(negedge clk);
    if (!back_to_back) begin
      bias = b; bias_ld = 1; @(negedge clk); bias_ld = 0;
    end
    acc = longint'($signed(b));
    for (int t = 0; t < nterms; t++) begin
      valid_in = 1; pmode = pm; first = (t == 0); last = (t == nterms - 1);
      weight = 16'($urandom); data_in = 16'($urandom);
      acc += term_ref(pm, weight, data_in, int'(trunc));
      if (t == nterms - 1) begin
        sh = acc >>> out_shift;
        exp_q.push_back(sh > 127 ? 127 : sh < -128 ? -128 : int'(sh));
        cyc_q.push_back(cyc);
      end
      if (t != nterms - 1) @(negedge clk);
    end
  endtask

  initial begin
    pmode = PREC8; valid_in = 0; first = 0; last = 0; weight = 0; data_in = 0; bias = 0;
    bias_ld = 0; trunc = 0; out_shift = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int g = 0; g < 600; g++) begin
      trunc = (g < 200) ? 3'd0 : 3'($urandom);
      out_shift = 5'($urandom % 10);
      run_group(prec_t'($urandom % 2), 1 + $urandom % 8, 16'($signed(12'($urandom))), 1'b0);
      @(negedge clk); valid_in = 0; first = 0; last = 0;
      repeat (LAT + 2) @(negedge clk);
    end
    // back-to-back groups sharing one bias: one term per cycle, no idle cycles
    trunc = 0; out_shift = 4;
    @(negedge clk); bias = 16'd5; bias_ld = 1; @(negedge clk); bias_ld = 0;
    for (int g = 0; g < 20; g++) begin
      run_group(PREC4, 1 + g % 3, 16'd5, 1'b1);
    end
    @(negedge clk); valid_in = 0;
    repeat (LAT + 4) @(negedge clk);
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("FAIL %0d results missing", exp_q.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
