// piso: parallel-in serial-out buffer between the MAC array and the single
// shared activation core.
//
// When `load` is asserted while `ready` (empty), the N values of a finished
// tile are captured together with a count of how many are valid and a tag.
// One value per cycle is then emitted on ser_out with its position idx_out,
// starting at index 0, until `count` values have left; `ready` returns high
// in the cycle after the last one. Loading while not ready is a protocol
// error (asserted).
//
// Sharing one activation core across all neurons through a PISO follows the
// published architecture; ordering and handshake are this design's choice.
module piso #(
  parameter int unsigned N     = 100,
  parameter int unsigned W     = 8,
  parameter int unsigned TAG_W = 24
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    load,
  input  logic [W-1:0]            par_in [N],
  input  logic [$clog2(N+1)-1:0]  count,
  input  logic [TAG_W-1:0]        tag_in,
  output logic                    ready,
  output logic                    valid_out,
  output logic [W-1:0]            ser_out,
  output logic [$clog2(N)-1:0]    idx_out,
  output logic [TAG_W-1:0]        tag_out
);
  logic [W-1:0]             buf_q [N];
  logic [$clog2(N+1)-1:0]   left;
  logic [$clog2(N)-1:0]     idx;
  logic [TAG_W-1:0]         tag_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      left <= '0; idx <= '0; tag_q <= '0;
    end else if (load && left == '0) begin
      left  <= count;
      idx   <= '0;
      tag_q <= tag_in;
    end else if (left != '0) begin
      left <= left - 1'b1;
      idx  <= idx + 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (load && left == '0) buf_q <= par_in;
  end

  assign ready     = (left == '0);
  assign valid_out = (left != '0);
  assign ser_out   = buf_q[idx];
  assign idx_out   = idx;
  assign tag_out   = tag_q;

  a_no_overrun: assert property (@(posedge clk) disable iff (!rst_n) !(load && left != '0));

endmodule
