// sdp_ram: simple dual-port synchronous RAM (one write port, one read port).
//
// Used as the block RAM for weights and biases and as the output buffer.
// Write: we/waddr/wdata sampled at the clock edge. Read: rdata is the word at
// raddr one cycle after raddr is presented (registered read, no reset of the
// contents). A read of the address being written returns the old word.
// Sizes are set by the instantiating level.
module sdp_ram #(
  parameter int unsigned DEPTH = 1024,
  parameter int unsigned DW    = 32
) (
  input  logic                     clk,
  input  logic                     we,
  input  logic [$clog2(DEPTH)-1:0] waddr,
  input  logic [DW-1:0]            wdata,
  input  logic [$clog2(DEPTH)-1:0] raddr,
  output logic [DW-1:0]            rdata
);
  logic [DW-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    rdata <= mem[raddr];
  end

endmodule
