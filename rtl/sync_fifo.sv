// sync_fifo: single-clock FIFO for intermediate results.
//
// DEPTH entries of W bits. push writes din when not full; pop removes the
// head when not empty; dout always shows the head (first-word fall-through).
// Push and pop in the same cycle keep the level. Overflow and underflow are
// asserted as protocol errors.
module sync_fifo #(
  parameter int unsigned DEPTH = 16,
  parameter int unsigned W     = 39
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          push,
  input  logic [W-1:0]  din,
  input  logic          pop,
  output logic [W-1:0]  dout,
  output logic          full,
  output logic          empty,
  output logic [$clog2(DEPTH+1)-1:0] level
);
  localparam int unsigned AW = $clog2(DEPTH);
  logic [W-1:0]  mem [DEPTH];
  logic [AW-1:0] wp, rp;

  wire do_push = push && !full;
  wire do_pop  = pop && !empty;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp <= '0; rp <= '0; level <= '0;
    end else begin
      if (do_push) wp <= (32'(wp) == DEPTH - 1) ? '0 : wp + 1'b1;
      if (do_pop)  rp <= (32'(rp) == DEPTH - 1) ? '0 : rp + 1'b1;
      case ({do_push, do_pop})
        2'b10:   level <= level + 1'b1;
        2'b01:   level <= level - 1'b1;
        default: level <= level;
      endcase
    end
  end

  always_ff @(posedge clk) if (do_push) mem[wp] <= din;

  assign dout  = mem[rp];
  assign full  = (32'(level) == DEPTH);
  assign empty = (level == '0);

  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n) !(push && full));
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) !(pop && empty));

endmodule
