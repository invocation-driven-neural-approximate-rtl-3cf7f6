// npu_pe -- processing element of an NPU tile.
//
// Computes one neuron at a time: out = sigmoid(sum_k w_k * x_k), where the bus
// delivers the inputs x_k one per cycle (bus_valid, bus_first on the first
// term, bus_last on the last) and the fetch unit supplies the matching weight
// from the PE's own weight buffer. Following the paper's PE figure the path is
// weight buffer -> fetch -> W reg, bus -> I reg, W reg and I reg -> MAC ->
// accumulator register -> sigmoid -> output register.
//
// Timing: cycle 0 the term is issued (weight read, I reg loaded); cycle 1 the
// MAC adds it; the cycle after the MAC of the last term the sigmoid output is
// registered, so out_valid pulses 3 cycles after the bus_last issue. Terms of
// the next neuron may be issued back to back. base_load (with the first term of
// a pass) points the fetch unit at the weights of the selected network. The
// weight write port (wb_*) is driven by the bus scheduler from the cache.
// The pipeline depths and the bias-as-last-term convention are this design's.
module npu_pe
  import mcma_pkg::*;
#(
  parameter int unsigned WB_DEPTH = 512
) (
  input  logic                        clk,
  input  logic                        rst_n,
  // weight buffer fill
  input  logic                        wb_we,
  input  logic [$clog2(WB_DEPTH)-1:0] wb_waddr,
  input  word_t                       wb_wdata,
  // network selection (start address of its weights)
  input  logic                        base_load,
  input  logic [$clog2(WB_DEPTH)-1:0] base_addr,
  // data bus
  input  logic                        bus_valid,
  input  logic                        bus_first,
  input  logic                        bus_last,
  input  word_t                       bus_data,
  // result
  output logic                        out_valid,
  output word_t                       out_data
);
  localparam int unsigned AW = $clog2(WB_DEPTH);

  logic          rd_en;
  logic [AW-1:0] rd_addr;
  logic [DATA_W-1:0] rd_data, w_reg;
  logic          w_valid;
  word_t         i_reg;
  logic          s1_first, s1_last, s2_last;
  acc_t          acc;
  word_t         act;

  weight_buffer #(.DEPTH(WB_DEPTH), .W(DATA_W)) u_wbuf (
    .clk, .we(wb_we), .waddr(wb_waddr), .wdata(wb_wdata),
    .re(rd_en), .raddr(rd_addr), .rdata(rd_data)
  );

  fetch_unit #(.DEPTH(WB_DEPTH), .W(DATA_W)) u_fetch (
    .clk, .rst_n, .base_load, .base_addr, .step(bus_valid),
    .rd_en, .rd_addr, .rd_data, .w_reg, .w_valid
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      i_reg    <= '0;
      s1_first <= 1'b0;
      s1_last  <= 1'b0;
      s2_last  <= 1'b0;
    end else begin
      if (bus_valid) i_reg <= bus_data;
      s1_first <= bus_first;
      s1_last  <= bus_last;
      s2_last  <= w_valid && s1_last;
    end
  end

  mac_unit u_mac (
    .clk, .rst_n, .en(w_valid), .first(s1_first),
    .w(word_t'(w_reg)), .i(i_reg), .acc
  );

  sigmoid_unit u_sig (.x(acc), .y(act));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_data  <= '0;
    end else begin
      out_valid <= s2_last;
      if (s2_last) out_data <= act;
    end
  end
endmodule
