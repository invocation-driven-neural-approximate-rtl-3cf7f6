// mcma_npu_top -- NPU with a multiclass classifier and multiple approximators (MCMA).
//
// Each input sample is judged by a multiclass classifier network running on
// the classifier tile. The controller takes the classifier's N_APPROX+1
// outputs, and the approximator tile then either evaluates the sample with the
// chosen approximator network (all approximators share one topology and differ
// only in their weights) or drops it and emits a CPU marker, telling the host
// to compute that sample precisely.
//
// Data flow (the paper's stages 1-6): input words are pushed into the input
// FIFOs of both tiles at once (in_valid/in_ready, size[0] words per sample,
// back to back); the classifier tile evaluates its network (1, 2) and leaves
// N_APPROX+1 words in its output FIFO; the controller reads them (3) and
// commands the approximator tile (4), which points every PE's fetch unit at
// the weights of the chosen approximator, reloading them from its cache first
// if they are not resident (case 3) or loading layer by layer (case 2), and
// evaluates the sample (5, 5'); results leave through its output FIFO (6) as
// out_word_t words (out_valid/out_ready), one per network output with the last
// marked, or a single cpu=1 word for a rejected sample. Results leave in
// sample order. The classifier tile works on the next sample while the
// approximator tile works on the current one.
//
// Configuration: with the design idle the host writes the weight caches
// (cw_tile 0 = classifier, 1 = approximators), sets cls_topo and apx_topo and
// pulses start; ready rises when both tiles have loaded their weight buffers.
// cfg_err reports a topology that does not fit, a classifier whose last layer
// is not N_APPROX+1 wide, or networks with different input counts.
// Weight layouts are described in bus_scheduler. The interfaces to the host
// CPU and memory are plain ports here; the paper leaves them as in the base
// NPU design.
module mcma_npu_top
  import mcma_pkg::*;
#(
  parameter int unsigned NUM_PE      = 8,
  parameter int unsigned WB_DEPTH    = 512,
  parameter int unsigned CACHE_LINES = 4096,
  parameter int unsigned FIFO_DEPTH  = 64
) (
  input  logic                           clk,
  input  logic                           rst_n,
  // configuration
  input  topo_t                          cls_topo,
  input  topo_t                          apx_topo,
  input  logic                           start,
  output logic                           ready,
  output logic                           cfg_err,
  output wsw_case_e                      apx_wcase,
  input  logic                           cw_we,
  input  logic                           cw_tile,
  input  logic [$clog2(CACHE_LINES)-1:0] cw_addr,
  input  word_t [NUM_PE-1:0]             cw_data,
  // samples in
  input  logic                           in_valid,
  input  word_t                          in_data,
  output logic                           in_ready,
  // results out
  output logic                           out_valid,
  output out_word_t                      out_word,
  input  logic                           out_ready,
  // statistics and events
  output logic [31:0]                    n_invoked [N_APPROX],
  output logic [31:0]                    n_cpu,
  output logic                           ev_reload,
  output logic                           ev_layer_load,
  output logic                           ev_switch
);
  logic      cls_init, apx_init, cls_err, apx_err;
  logic      cls_in_ready, apx_in_ready;
  logic      cls_valid, cls_pop, cmd_valid, cmd_ready;
  out_word_t cls_word;
  apx_cmd_t  cmd;

  // the classifier must have one output per approximator plus the CPU
  // output, and both networks must read the same sample
  logic shape_err_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)     shape_err_q <= 1'b0;
    else if (start) shape_err_q <= (int'(cls_topo.n_layers) < 1) || (int'(cls_topo.n_layers) > MAX_LAYERS)
                                || (int'(cls_topo.size[cls_topo.n_layers]) != N_CLASS)
                                || (cls_topo.size[0] != apx_topo.size[0]);
  end

  assign ready    = cls_init && apx_init && !shape_err_q;
  assign cfg_err  = cls_err || apx_err || shape_err_q;
  assign in_ready = cls_in_ready && apx_in_ready;

  npu_tile #(
    .NUM_PE(NUM_PE), .WB_DEPTH(WB_DEPTH), .CACHE_LINES(CACHE_LINES),
    .FIFO_DEPTH(FIFO_DEPTH), .N_NETS(1)
  ) u_cls_tile (
    .clk, .rst_n,
    .topo(cls_topo), .start, .init_done(cls_init), .cfg_err(cls_err), .wcase(),
    .cw_we(cw_we && !cw_tile), .cw_addr, .cw_data,
    .in_valid(in_valid && in_ready), .in_data, .in_ready(cls_in_ready),
    .cmd_valid(1'b1), .cmd('0), .cmd_ready(),
    .out_valid(cls_valid), .out_word(cls_word), .out_pop(cls_pop),
    .ev_reload(), .ev_layer_load(), .ev_switch()
  );

  mcma_controller u_ctrl (
    .clk, .rst_n,
    .cls_valid, .cls_word, .cls_pop,
    .cmd_valid, .cmd, .cmd_ready,
    .n_invoked, .n_cpu
  );

  npu_tile #(
    .NUM_PE(NUM_PE), .WB_DEPTH(WB_DEPTH), .CACHE_LINES(CACHE_LINES),
    .FIFO_DEPTH(FIFO_DEPTH), .N_NETS(N_APPROX)
  ) u_apx_tile (
    .clk, .rst_n,
    .topo(apx_topo), .start, .init_done(apx_init), .cfg_err(apx_err), .wcase(apx_wcase),
    .cw_we(cw_we && cw_tile), .cw_addr, .cw_data,
    .in_valid(in_valid && in_ready), .in_data, .in_ready(apx_in_ready),
    .cmd_valid, .cmd, .cmd_ready,
    .out_valid, .out_word, .out_pop(out_valid && out_ready),
    .ev_reload, .ev_layer_load, .ev_switch
  );
endmodule
