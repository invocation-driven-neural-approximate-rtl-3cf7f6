// weight_cache -- on-chip weight store of an NPU tile.
//
// LINES lines, each NUM_PE words wide: word p of a line is meant for PE p, so
// one read delivers one weight to every PE and a weight buffer refill takes
// one cycle per line. The host writes whole lines through the write port
// before start; the bus scheduler reads with a one-cycle registered latency.
// The paper calls this block the tile's cache and says only that weights are
// scheduled from it to the PEs; here it is a plain SRAM with no miss handling.
module weight_cache
  import mcma_pkg::*;
#(
  parameter int unsigned LINES  = 4096,
  parameter int unsigned NUM_PE = 8
) (
  input  logic                     clk,
  input  logic                     we,
  input  logic [$clog2(LINES)-1:0] waddr,
  input  word_t [NUM_PE-1:0]       wdata,
  input  logic                     re,
  input  logic [$clog2(LINES)-1:0] raddr,
  output word_t [NUM_PE-1:0]       rdata
);
  word_t [NUM_PE-1:0] mem [LINES];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    if (re) rdata <= mem[raddr];
  end
endmodule
