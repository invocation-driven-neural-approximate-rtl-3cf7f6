// fetch_unit -- PE fetch unit: address generator between weight buffer and W reg.
//
// Weights are laid out in the weight buffer in exactly the order the PE uses
// them, so fetching is a start address plus a running pointer. base_load sets
// the pointer to base_addr: this is how the controller's choice of
// approximator reaches the PE (the "Address" input of the PE in the paper's
// figure). Each step issues a read at the pointer and advances it by one; the
// word read lands in the W register (w_reg) one cycle later, with w_valid.
// base_load and step in the same cycle read at base_addr.
module fetch_unit #(
  parameter int unsigned DEPTH = 512,
  parameter int unsigned W     = 16
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     base_load,
  input  logic [$clog2(DEPTH)-1:0] base_addr,
  input  logic                     step,
  // weight buffer read port
  output logic                     rd_en,
  output logic [$clog2(DEPTH)-1:0] rd_addr,
  input  logic [W-1:0]             rd_data,
  // W register
  output logic [W-1:0]             w_reg,
  output logic                     w_valid
);
  localparam int unsigned AW = $clog2(DEPTH);
  logic [AW-1:0] ptr;

  assign rd_en   = step;
  assign rd_addr = base_load ? base_addr : ptr;
  assign w_reg   = rd_data;   // the buffer's output register serves as W reg

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ptr     <= '0;
      w_valid <= 1'b0;
    end else begin
      w_valid <= step;
      if (step)           ptr <= rd_addr + 1'b1;
      else if (base_load) ptr <= base_addr;
    end
  end
endmodule
