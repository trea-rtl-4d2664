// tb_cordic_hyp: self-checking testbench for cordic_hyp.
//
// Feeds one angle per cycle in [-0.75, 0.75] and compares cosh and sinh with
// real-valued references (tolerance 0.02, which bounds the residual angle of
// seven iterations), checks that the sideband word arrives with its sample
// and that the latency is 7 clock edges.
module tb_cordic_hyp;
  localparam int FW = 14, W = FW + 4, ITER = 7;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic valid_in, valid_out;
  logic signed [W-1:0] z_in, cosh_out, sinh_out;
  logic [7:0] sb_in, sb_out;
  int checks = 0, failures = 0, cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  cordic_hyp #(.FW(FW), .SB_W(8)) dut (.*);

  real zq[$]; int sq[$], cq[$];
  always @(posedge clk) if (rst_n && valid_out) begin
    real z, ec, es, gc, gs; int sb, c0;
    z = zq.pop_front(); sb = sq.pop_front(); c0 = cq.pop_front();
    ec = (($exp(z) + $exp(-z)) / 2.0); es = (($exp(z) - $exp(-z)) / 2.0);
    gc = real'(cosh_out) / real'(1 << FW); gs = real'(sinh_out) / real'(1 << FW);
    checks += 4;
    if (gc - ec > 0.02 || ec - gc > 0.02) begin failures++; $display("FAIL cosh(%f)=%f got %f", z, ec, gc); end
    if (gs - es > 0.02 || es - gs > 0.02) begin failures++; $display("FAIL sinh(%f)=%f got %f", z, es, gs); end
    if (sb_out != 8'(sb)) begin failures++; $display("FAIL sideband"); end
    if (cyc - c0 != ITER) begin failures++; $display("FAIL latency %0d", cyc - c0); end
  end

  initial begin #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  initial begin
    int zi;
    valid_in = 0; z_in = 0; sb_in = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int i = 0; i < 1000; i++) begin
      @(negedge clk);
      zi = int'($urandom % 24577) - 12288;      // +/- 0.75 in Q.14
      valid_in = 1; z_in = W'(zi); sb_in = 8'(i);
      zq.push_back(real'(zi) / real'(1 << FW)); sq.push_back(i % 256); cq.push_back(cyc);
    end
    @(negedge clk); valid_in = 0;
    repeat (ITER + 3) @(posedge clk);
    checks++;
    if (zq.size() != 0) begin failures++; $display("FAIL missing results"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
