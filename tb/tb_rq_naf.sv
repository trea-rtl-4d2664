// tb_rq_naf: self-checking testbench for rq_naf.
//
// Sends every 8-bit input (Q3.4, -8.0 .. +7.9375) through each of the four
// functions, one sample per cycle with the function changing from sample to
// sample, and compares with real-valued references: Sigmoid 1/(1+e^-z) and
// Tanh scaled to Q3.4 within one LSB, ReLU and identity exactly. Checks the
// 9-cycle latency, the tag sideband, one-result-per-cycle throughput and the
// busy flag.
module tb_rq_naf;
  import trea_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic valid_in, valid_out, busy;
  af_t af_sel; logic [7:0] x_in, y_out; logic [30:0] tag_in, tag_out;
  int checks = 0, failures = 0, cyc = 0, outs = 0;
  always @(posedge clk) cyc <= cyc + 1;

  rq_naf dut (.*);

  int eq[$], cq[$], tq[$]; bit exactq[$];
  always @(posedge clk) if (rst_n && valid_out) begin
    int e, c0, t, d; bit ex;
    e = eq.pop_front(); c0 = cq.pop_front(); t = tq.pop_front(); ex = exactq.pop_front();
    outs++;
    d = int'($signed(y_out)) - e;
    checks += 3;
    if (ex ? d != 0 : (d > 1 || d < -1)) begin failures++; $display("FAIL y=%0d exp=%0d", $signed(y_out), e); end
    if (cyc - c0 != 9) begin failures++; $display("FAIL latency %0d", cyc - c0); end
    if (tag_out != 31'(t)) begin failures++; $display("FAIL tag"); end
  end

  initial begin #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  initial begin
    real z, f; int e;
    valid_in = 0; af_sel = AF_RELU; x_in = 0; tag_in = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    @(negedge clk);
    checks++; if (busy) begin failures++; $display("FAIL busy when empty"); end
    for (int i = 0; i < 4 * 256; i++) begin
      valid_in = 1; af_sel = af_t'(i % 4); x_in = 8'(i / 4); tag_in = 31'(i * 7);
      z = real'($signed(x_in)) / 16.0;
      unique case (af_sel)
        AF_RELU:    begin e = z < 0 ? 0 : int'($signed(x_in)); exactq.push_back(1); end
        AF_NONE:    begin e = int'($signed(x_in));              exactq.push_back(1); end
        AF_SIGMOID: begin f = 1.0 / (1.0 + $exp(-z)); e = $rtoi(f * 16.0 + 0.5); exactq.push_back(0); end
        default:    begin f = ($exp(z) - $exp(-z)) / ($exp(z) + $exp(-z));
                          e = (f >= 0) ? $rtoi(f * 16.0 + 0.5) : -$rtoi(-f * 16.0 + 0.5); exactq.push_back(0); end
      endcase
      eq.push_back(e); cq.push_back(cyc); tq.push_back(i * 7);
      @(negedge clk);
      if (i == 20) begin checks++; if (!busy) begin failures++; $display("FAIL busy low"); end end
    end
    valid_in = 0;
    repeat (12) @(posedge clk);
    checks += 2;
    if (outs != 1024) begin failures++; $display("FAIL outs %0d", outs); end
    if (busy) begin failures++; $display("FAIL busy after drain"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
