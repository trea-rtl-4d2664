// tb_spq_mult: self-checking testbench for spq_mult.
//
// Drives one random operand pair per cycle in all four signedness
// combinations and truncation settings, and compares every product with a
// reference computed here: the greedy signed power-of-two decomposition of
// the weight with each shifted term floored to a multiple of 2^trunc
// (trunc = 0 must equal the exact product x*w). Also checks the latency of
// STAGES cycles and, in a second 8-bit instance, the worked example of an
// input 1.59375 (Q2.5) times weight 0.875 (Q1.7) with input-width truncation.
module tb_spq_mult;
  localparam int N = 4, STAGES = 5;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic valid_in, x_sgn, w_sgn, valid_out;
  logic [N-1:0] x, w;
  logic [1:0] trunc;
  logic signed [2*N:0] p;
  int checks = 0, failures = 0;

  spq_mult #(.N(N), .STAGES(STAGES)) dut (.*);

  // 8-bit instance for the worked example
  logic v8, v8o; logic [7:0] x8, w8; logic [2:0] t8; logic signed [16:0] p8;
  spq_mult #(.N(8), .STAGES(STAGES)) dut8 (.clk, .rst_n, .valid_in(v8), .x(x8), .w(w8),
    .x_sgn(1'b1), .w_sgn(1'b1), .trunc(t8), .valid_out(v8o), .p(p8));

  function automatic int ref_prod(int xv, int wv, int tr, int nst);
    int res, acc, e, mag, term;
    res = wv; acc = 0;
    for (int i = 0; i < nst; i++) begin
      if (res == 0) break;
      mag = (res < 0) ? -res : res;
      e = 0;
      while ((1 << (e + 1)) <= mag) e++;
      term = xv * (1 << e);
      term = (term >= 0) ? (term / (1 << tr)) * (1 << tr)
                         : -(((-term) + (1 << tr) - 1) / (1 << tr)) * (1 << tr);  // floor
      if (res < 0) begin acc -= term; res += (1 << e); end
      else         begin acc += term; res -= (1 << e); end
    end
    return acc;
  endfunction

  int exp_q[$];
  int cyc_q[$];
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  always @(posedge clk) if (rst_n && valid_out) begin
    int e, c0;
    checks++;
    e = exp_q.pop_front(); c0 = cyc_q.pop_front();
    if (p !== (2*N+1)'(e)) begin failures++; $display("FAIL p=%0d exp=%0d", p, e); end
    checks++;
    if (cyc - c0 != STAGES) begin failures++; $display("FAIL latency %0d", cyc - c0); end
  end

  initial begin
    #200000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    int xv, wv;
    valid_in = 0; x = 0; w = 0; x_sgn = 0; w_sgn = 0; trunc = 0; v8 = 0; x8 = 0; w8 = 0; t8 = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    for (int i = 0; i < 2000; i++) begin
      @(negedge clk);
      valid_in = ($urandom % 4) != 0;
      x = 4'($urandom); w = 4'($urandom);
      x_sgn = 1'($urandom); w_sgn = 1'($urandom);
      trunc = (i < 1000) ? 2'd0 : 2'($urandom);
      if (valid_in) begin
        xv = x_sgn ? int'($signed(x)) : int'(x);
        wv = w_sgn ? int'($signed(w)) : int'(w);
        if (trunc == 0 && ref_prod(xv, wv, 0, STAGES) != xv * wv) begin
          failures++; $display("reference model disagrees with x*w");
        end
        exp_q.push_back(ref_prod(xv, wv, int'(trunc), STAGES));
        cyc_q.push_back(cyc);
      end
    end
    @(negedge clk); valid_in = 0;
    repeat (STAGES + 2) @(posedge clk);
    // worked example: X = 01.10011 (51/32), W = 0.875 -> 112 in Q1.7, trunc 7
    @(negedge clk); v8 = 1; x8 = 8'd51; w8 = 8'd112; t8 = 3'd7;
    @(negedge clk); v8 = 0;
    wait (v8o); @(negedge clk);
    checks++;
    // terms 25, 12, 6 (00.11001, 00.01100, 00.00110) in X's own LSBs, scaled by 2^7
    if (p8 !== 17'((25 + 12 + 6) * 128)) begin failures++; $display("FAIL example p8=%0d", p8); end
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("FAIL %0d results missing", exp_q.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
