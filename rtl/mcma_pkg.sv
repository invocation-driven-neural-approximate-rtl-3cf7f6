// mcma_pkg -- types and constants shared by the MCMA neural processing unit.
//
// The MCMA NPU runs a multiclass classifier network on one tile and one of
// several approximator networks (identical topology, different weights) on a
// second tile. This package holds the number format, the network topology
// record the bus schedulers are configured with, and the encoding of the
// classifier's decision.
//
// Number format (a choice of this design, the paper gives none): 16-bit two's
// complement, FRAC = 8 fraction bits. Products and sums are 32 bits with
// 2*FRAC fraction bits. N_APPROX = 3 approximators follows the paper's
// experiments; the classifier then has N_APPROX+1 outputs, the last one meaning
// "not safe to approximate, run on the CPU". Layer sizes up to 64 and three
// weight layers cover every benchmark topology in the paper.
package mcma_pkg;

  localparam int unsigned DATA_W      = 16;
  localparam int unsigned FRAC        = 8;
  localparam int unsigned ACC_W       = 32;
  localparam int unsigned N_APPROX    = 3;
  localparam int unsigned N_CLASS     = N_APPROX + 1;
  localparam int unsigned MAX_LAYERS  = 3;   // weight layers
  localparam int unsigned MAX_NEURONS = 64;  // widest layer, inputs included

  typedef logic signed [DATA_W-1:0] word_t;
  typedef logic signed [ACC_W-1:0]  acc_t;

  localparam word_t ONE = word_t'(1 << FRAC);   // 1.0, the bias input

  typedef logic [$clog2(MAX_NEURONS+1)-1:0] lsize_t;   // 0..64
  typedef logic [$clog2(MAX_LAYERS+1)-1:0]  lcount_t;  // 0..3

  // Network topology as written by the host: n_layers weight layers,
  // size[0] inputs, size[l] neurons of weight layer l (1..n_layers).
  typedef struct packed {
    lcount_t                      n_layers;
    lsize_t [MAX_LAYERS:0]        size;
  } topo_t;

  typedef logic [$clog2(N_CLASS)-1:0] class_t;     // 0..N_APPROX-1: A1..An, N_APPROX: nC
  localparam class_t CLASS_CPU = class_t'(N_APPROX);

  // How weights reach the PE weight buffers (paper's three cases).
  typedef enum logic [1:0] {
    WS_ALL_RESIDENT = 2'd1,  // case 1: every approximator fits, switching is a base-address change
    WS_LAYERWISE    = 2'd2,  // case 2: one network does not fit, load layer by layer
    WS_RELOAD       = 2'd3   // case 3: one fits, reload when the selected approximator changes
  } wsw_case_e;

  // Command from the controller to the approximator tile.
  typedef struct packed {
    logic   to_cpu;   // drop the sample, emit a CPU marker
    class_t sel;      // approximator index when !to_cpu
  } apx_cmd_t;

  // Word in a tile's output FIFO.
  typedef struct packed {
    logic   cpu;    // marker: the sample was rejected, run it on the CPU (data unused)
    logic   last;   // last word of this sample's result
    class_t sel;    // approximator that produced it
    word_t  data;
  } out_word_t;

endpackage
