// npu_tile -- one tile of the NPU.
//
// An input FIFO, an output FIFO, a weight cache, a bus scheduler and NUM_PE
// processing elements connected by the tile's internal bus, as in the paper's
// NPU figure. The host fills the cache (cw_*) and pulses start with the
// topology of the networks the tile runs; the scheduler then loads the PE
// weight buffers and raises init_done. Input words are pushed into the input
// FIFO (in_valid/in_ready); for each accepted command the tile evaluates one
// sample and delivers its results as out_word_t words at the output FIFO head
// (out_valid, taken with out_pop). Timing of one sample, for a layer of M
// neurons with K inputs: ceil(M/NUM_PE)*(K+1) bus cycles plus a 4-cycle drain,
// plus size[0] cycles to read the input and one cycle per output word; any
// weight loading (cases 2 and 3) adds one cycle per cache line and 2 cycles.
// The same tile serves as the classifier tile (N_NETS = 1) and the
// approximator tile (N_NETS = number of approximators).
module npu_tile
  import mcma_pkg::*;
#(
  parameter int unsigned NUM_PE      = 8,
  parameter int unsigned WB_DEPTH    = 512,
  parameter int unsigned CACHE_LINES = 4096,
  parameter int unsigned FIFO_DEPTH  = 64,
  parameter int unsigned N_NETS      = N_APPROX
) (
  input  logic                           clk,
  input  logic                           rst_n,
  // configuration
  input  topo_t                          topo,
  input  logic                           start,
  output logic                           init_done,
  output logic                           cfg_err,
  output wsw_case_e                      wcase,
  input  logic                           cw_we,
  input  logic [$clog2(CACHE_LINES)-1:0] cw_addr,
  input  word_t [NUM_PE-1:0]             cw_data,
  // input FIFO write side
  input  logic                           in_valid,
  input  word_t                          in_data,
  output logic                           in_ready,
  // command
  input  logic                           cmd_valid,
  input  apx_cmd_t                       cmd,
  output logic                           cmd_ready,
  // output FIFO read side
  output logic                           out_valid,
  output out_word_t                      out_word,
  input  logic                           out_pop,
  // events
  output logic                           ev_reload,
  output logic                           ev_layer_load,
  output logic                           ev_switch
);
  localparam int unsigned WAW = $clog2(WB_DEPTH);
  localparam int unsigned CAW = $clog2(CACHE_LINES);

  // input FIFO
  logic  if_full, if_empty, if_pop;
  word_t if_data;

  sync_fifo #(.W(DATA_W), .DEPTH(FIFO_DEPTH)) u_in_fifo (
    .clk, .rst_n, .push(in_valid && !if_full), .wdata(in_data), .pop(if_pop),
    .rdata(if_data), .full(if_full), .empty(if_empty), .count()
  );
  assign in_ready = !if_full;

  // output FIFO
  logic      of_full, of_empty, of_push;
  out_word_t of_wdata, of_rdata;

  sync_fifo #(.W($bits(out_word_t)), .DEPTH(FIFO_DEPTH)) u_out_fifo (
    .clk, .rst_n, .push(of_push), .wdata(of_wdata), .pop(out_pop),
    .rdata(of_rdata), .full(of_full), .empty(of_empty), .count()
  );
  assign out_valid = !of_empty;
  assign out_word  = of_rdata;

  // weight cache
  logic               c_re;
  logic [CAW-1:0]     c_raddr;
  word_t [NUM_PE-1:0] c_rdata;

  weight_cache #(.LINES(CACHE_LINES), .NUM_PE(NUM_PE)) u_cache (
    .clk, .we(cw_we), .waddr(cw_addr), .wdata(cw_data),
    .re(c_re), .raddr(c_raddr), .rdata(c_rdata)
  );

  // internal bus
  logic               wb_we, base_load, bus_valid, bus_first, bus_last;
  logic [WAW-1:0]     wb_waddr, base_addr;
  word_t [NUM_PE-1:0] wb_wdata, pe_out_data;
  word_t              bus_data;
  logic [NUM_PE-1:0]  pe_out_valid;

  bus_scheduler #(
    .NUM_PE(NUM_PE), .WB_DEPTH(WB_DEPTH), .CACHE_LINES(CACHE_LINES), .N_NETS(N_NETS)
  ) u_sched (
    .clk, .rst_n, .topo, .start, .init_done, .cfg_err, .wcase,
    .cmd_valid, .cmd, .cmd_ready,
    .in_empty(if_empty), .in_data(if_data), .in_pop(if_pop),
    .out_full(of_full), .out_push(of_push), .out_word(of_wdata),
    .cache_re(c_re), .cache_raddr(c_raddr), .cache_rdata(c_rdata),
    .wb_we, .wb_waddr, .wb_wdata, .base_load, .base_addr,
    .bus_valid, .bus_first, .bus_last, .bus_data,
    .pe_out_valid, .pe_out_data,
    .ev_reload, .ev_layer_load, .ev_switch
  );

  for (genvar p = 0; p < NUM_PE; p++) begin : g_pe
    npu_pe #(.WB_DEPTH(WB_DEPTH)) u_pe (
      .clk, .rst_n,
      .wb_we, .wb_waddr, .wb_wdata(wb_wdata[p]),
      .base_load, .base_addr,
      .bus_valid, .bus_first, .bus_last, .bus_data,
      .out_valid(pe_out_valid[p]), .out_data(pe_out_data[p])
    );
  end
endmodule
