// l1_mem: L1 feature memory.
//
// Holds input images and the outputs of every layer (which become the next
// layer's input), one image row per word of ROW_W bytes. Writes are one byte
// at (wrow, wcol); a read returns a whole row one cycle after rrow is
// presented, which is what the kernel line buffer loads. The published
// architecture calls this block an L1 cache; no tag or miss handling is
// described, so it is built as an addressed scratchpad.
module l1_mem #(
  parameter int unsigned DEPTH = 1024,
  parameter int unsigned ROW_W = 104
) (
  input  logic                      clk,
  input  logic                      we,
  input  logic [$clog2(DEPTH)-1:0]  wrow,
  input  logic [$clog2(ROW_W)-1:0]  wcol,
  input  logic [7:0]                wdata,
  input  logic [$clog2(DEPTH)-1:0]  rrow,
  output logic [7:0]                rdata [ROW_W]
);
  logic [7:0] mem [DEPTH][ROW_W];

  always_ff @(posedge clk) begin
    if (we && 32'(wcol) < ROW_W) mem[wrow][wcol] <= wdata;
    rdata <= mem[rrow];
  end

endmodule
