// weight_buffer -- per-PE weight memory.
//
// DEPTH words of DATA_W bits with one write port (filled from the tile's
// weight cache by the bus scheduler) and one read port (used by the fetch
// unit). Reads are registered: rdata holds the word at raddr one cycle after
// re. Writing and reading the same address in one cycle returns the old word.
// Depending on the network size it holds every approximator side by side
// (case 1 in the paper), one approximator (case 3) or one layer (case 2); the
// layout is decided by the bus scheduler, this block only stores words.
module weight_buffer #(
  parameter int unsigned DEPTH = 512,
  parameter int unsigned W     = 16
) (
  input  logic                     clk,
  input  logic                     we,
  input  logic [$clog2(DEPTH)-1:0] waddr,
  input  logic [W-1:0]             wdata,
  input  logic                     re,
  input  logic [$clog2(DEPTH)-1:0] raddr,
  output logic [W-1:0]             rdata
);
  logic [W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    if (re) rdata <= mem[raddr];
  end
endmodule
