// out_writer: output muxing logic.
//
// Takes activated results from the intermediate FIFO, one per cycle, and
// writes each both to its place in L1 (so the next time-multiplexed layer can
// read it) and to the host-readable output buffer at
//   (channel*OH + row) * OW + column.
// Each FIFO entry carries the result byte and its tag (L1 row, output row
// index, column). The write strobes are registered: they appear the cycle
// after the entry is popped. `busy` covers queued and in-progress writes.
//
// The output-muxing block and output buffer are named in the published
// architecture; the addressing is this design's choice.
module out_writer
  import trea_pkg::*;
#(
  parameter int unsigned L1_AW = 10,
  parameter int unsigned OB_AW = 13
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [6:0]        ow,
  // FIFO side
  input  logic              fifo_empty,
  input  logic [38:0]       fifo_dout,
  output logic              fifo_pop,
  // L1 write
  output logic              l1_we,
  output logic [L1_AW-1:0]  l1_wrow,
  output logic [6:0]        l1_wcol,
  output logic [7:0]        l1_wdata,
  // output buffer write
  output logic              ob_we,
  output logic [OB_AW-1:0]  ob_waddr,
  output logic [7:0]        ob_wdata,
  output logic              busy
);
  res_tag_t   tag;
  logic [7:0] val;
  assign {tag, val} = fifo_dout;
  assign fifo_pop   = !fifo_empty;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      l1_we <= 1'b0; ob_we <= 1'b0;
      l1_wrow <= '0; l1_wcol <= '0; l1_wdata <= '0; ob_waddr <= '0; ob_wdata <= '0;
    end else begin
      l1_we <= fifo_pop;
      ob_we <= fifo_pop;
      if (fifo_pop) begin
        l1_wrow  <= L1_AW'(tag.l1_row);
        l1_wcol  <= tag.col;
        l1_wdata <= val;
        ob_waddr <= OB_AW'(32'(tag.ob_row) * 32'(ow) + 32'(tag.col));
        ob_wdata <= val;
      end
    end
  end

  assign busy = !fifo_empty || l1_we;

endmodule
