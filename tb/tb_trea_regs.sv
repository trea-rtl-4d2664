// tb_trea_regs: self-checking testbench for trea_regs.
//
// Writes every descriptor field of every layer with random values, checks the
// decoded descriptor structs and the read-back, the one-cycle start pulse,
// the busy-cycle counter and the sticky done flag.
module tb_trea_regs;
  import trea_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic we, re, start, busy, dnn_done_pulse; logic [11:0] waddr, raddr; logic [31:0] wdata, rdata, stall_cycles;
  logic [3:0] num_layers; layer_desc_t desc [NL];
  int checks = 0, failures = 0;

  trea_regs dut (.*);

  task automatic wr(input logic [11:0] a, input logic [31:0] d);
    @(negedge clk); we = 1; waddr = a; wdata = d; @(negedge clk); we = 0;
  endtask
  task automatic rd(input logic [11:0] a, output logic [31:0] d);
    @(negedge clk); re = 1; raddr = a; @(negedge clk); re = 0; d = rdata;
  endtask

  initial begin #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    logic [31:0] v [NL][8]; logic [31:0] d; int starts;
    we = 0; re = 0; waddr = 0; raddr = 0; wdata = 0; busy = 0; dnn_done_pulse = 0; stall_cycles = 32'd77;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int l = 0; l < NL; l++) for (int f = 0; f < 8; f++) begin
      v[l][f] = $urandom; wr(12'h100 + 12'(32 * l + 4 * f), v[l][f]);
    end
    for (int l = 0; l < NL; l++) begin
      checks += 8;
      if (desc[l].in_w != v[l][0][6:0]) failures++;
      if (desc[l].in_ch != v[l][2][7:0] || desc[l].out_ch != v[l][3][7:0]) failures++;
      if (desc[l].k != v[l][4][2:0] || desc[l].prec != prec_t'(v[l][4][4])) failures++;
      if (desc[l].sharp != v[l][4][5] || desc[l].af != af_t'(v[l][4][9:8])) failures++;
      if (desc[l].in_base != v[l][5][11:0] || desc[l].out_base != v[l][5][27:16]) failures++;
      if (desc[l].w_base != v[l][6][11:0] || desc[l].b_base != v[l][6][23:16]) failures++;
      if (desc[l].out_shift != v[l][7][4:0] || desc[l].trunc != v[l][7][10:8]) failures++;
      rd(12'h100 + 12'(32 * l + 12), d);
      if (d != v[l][3]) begin failures++; $display("FAIL readback l=%0d %h %h in_w %h/%h", l, d, v[l][3], desc[l].in_w, v[l][0]); end
    end
    wr(12'h004, 32'd3); rd(12'h004, d);
    checks++; if (d != 3 || num_layers != 3) begin failures++; $display("FAIL num_layers"); end
    rd(12'h00C, d); checks++; if (d != 77) begin failures++; $display("FAIL stalls"); end
    // start pulse lasts one cycle
    starts = 0;
    fork
      wr(12'h000, 32'd1);
      repeat (4) @(posedge clk) if (start) starts++;
    join
    checks++; if (starts != 1) begin failures++; $display("FAIL start pulses %0d", starts); end
    @(negedge clk); busy = 1; repeat (10) @(negedge clk); busy = 0;
    dnn_done_pulse = 1; @(negedge clk); dnn_done_pulse = 0;
    rd(12'h008, d); checks++; if (d != 10) begin failures++; $display("FAIL cycles %0d", d); end
    rd(12'h000, d); checks++; if (d[1] != 1'b1) begin failures++; $display("FAIL done flag"); end
    wr(12'h000, 32'd1); rd(12'h000, d); checks++; if (d[1] != 1'b0) begin failures++; $display("FAIL done clear"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
