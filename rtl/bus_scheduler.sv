// bus_scheduler -- sequencer of an NPU tile.
//
// Moves everything on the tile's internal bus: input words from the input FIFO
// to the PEs, PE results to the next layer or to the output FIFO, and weights
// from the weight cache into the PE weight buffers.
//
// Evaluation of one sample. Once the first word of the sample is in the input
// FIFO the scheduler takes a command (which network to run, or "send this
// sample to the CPU"), pops size[0] input words into its
// activation array, then runs each weight layer l. The M = size[l] neurons of
// a layer are dealt to the PEs round-robin, NUM_PE at a time (group g holds
// neurons g*NUM_PE .. g*NUM_PE+NUM_PE-1). For each group the K = size[l-1]
// inputs and then the constant 1.0 (bias) are broadcast, one per cycle; every
// PE multiplies them by weights from its own buffer. Results come back three
// cycles after a group's last term and are collected into a second array,
// which becomes the input of the next layer. After the last layer the M
// results are pushed to the output FIFO, one per cycle, the final one marked
// last. A CPU command drops the sample's input words and pushes a single
// marker word instead.
//
// Weights. In the cache, network n starts at line n*NET_LINES; a layer takes
// ceil(M/NUM_PE)*(K+1) lines, in issue order, and word p of a line goes to PE p
// (unused PE slots hold zeros). The weight buffers are filled in the same
// order, so each PE's fetch unit just counts up from a start address. Which of
// the paper's three cases applies is decided at start from the topology:
//   case 1, all N_NETS networks fit in WB_DEPTH: all are loaded at start and
//          switching is only a different start address (no stall);
//   case 3, one network fits: the selected network is reloaded whenever it
//          differs from the one resident in the buffers;
//   case 2, one network does not fit: each layer is loaded before it runs.
// A layer larger than WB_DEPTH, or networks that overflow the cache, raise
// cfg_err and the tile refuses to start.
//
// The paper gives the scheduler's function; the round-robin neuron mapping,
// the activation arrays, the cache layout and the command interface are the
// choices of this design. The classifier tile is an instance with N_NETS = 1
// and a command that is always "run network 0".
module bus_scheduler
  import mcma_pkg::*;
#(
  parameter int unsigned NUM_PE      = 8,
  parameter int unsigned WB_DEPTH    = 512,
  parameter int unsigned CACHE_LINES = 4096,
  parameter int unsigned N_NETS      = N_APPROX
) (
  input  logic                           clk,
  input  logic                           rst_n,
  // configuration
  input  topo_t                          topo,
  input  logic                           start,       // latch topo, load weights
  output logic                           init_done,
  output logic                           cfg_err,
  output wsw_case_e                      wcase,
  // command
  input  logic                           cmd_valid,
  input  apx_cmd_t                       cmd,
  output logic                           cmd_ready,
  // input FIFO
  input  logic                           in_empty,
  input  word_t                          in_data,
  output logic                           in_pop,
  // output FIFO
  input  logic                           out_full,
  output logic                           out_push,
  output out_word_t                      out_word,
  // weight cache read port
  output logic                           cache_re,
  output logic [$clog2(CACHE_LINES)-1:0] cache_raddr,
  input  word_t [NUM_PE-1:0]             cache_rdata,
  // PEs
  output logic                           wb_we,
  output logic [$clog2(WB_DEPTH)-1:0]    wb_waddr,
  output word_t [NUM_PE-1:0]             wb_wdata,
  output logic                           base_load,
  output logic [$clog2(WB_DEPTH)-1:0]    base_addr,
  output logic                           bus_valid,
  output logic                           bus_first,
  output logic                           bus_last,
  output word_t                          bus_data,
  input  logic [NUM_PE-1:0]              pe_out_valid,
  input  word_t [NUM_PE-1:0]             pe_out_data,
  // events, one-cycle pulses
  output logic                           ev_reload,     // case 3 reload started
  output logic                           ev_layer_load, // case 2 layer load started
  output logic                           ev_switch      // sample runs a different network than the previous one
);
  localparam int unsigned WAW = $clog2(WB_DEPTH);
  localparam int unsigned CAW = $clog2(CACHE_LINES);
  localparam int unsigned LW  = 24;            // width of line counts
  localparam int unsigned GMAX = (MAX_NEURONS + NUM_PE - 1) / NUM_PE;
  localparam int unsigned SW  = (N_NETS > 1) ? $clog2(N_NETS) : 1;

  typedef enum logic [3:0] {
    S_IDLE, S_LOAD, S_READY, S_DROP, S_CPU_OUT, S_READIN,
    S_LAYER, S_ISSUE, S_DRAIN, S_OUTPUT
  } state_e;

  state_e state, load_ret;

  topo_t                  t_q;
  logic [LW-1:0]          layer_lines [MAX_LAYERS+1];
  logic [LW-1:0]          layer_off   [MAX_LAYERS+1];
  logic [LW-1:0]          net_lines;
  logic [LW-1:0]          groups      [MAX_LAYERS+1];
  wsw_case_e              case_c;
  logic                   err_c;

  // derived sizes of the latched topology
  always_comb begin
    net_lines = '0;
    err_c     = 1'b0;
    for (int l = 0; l <= MAX_LAYERS; l++) begin
      groups[l]      = '0;
      layer_lines[l] = '0;
      layer_off[l]   = net_lines;
      if (l >= 1 && l <= int'(t_q.n_layers)) begin
        groups[l]      = LW'((int'(t_q.size[l]) + NUM_PE - 1) / NUM_PE);
        layer_lines[l] = groups[l] * LW'(int'(t_q.size[l-1]) + 1);
        net_lines      = net_lines + layer_lines[l];
        if (layer_lines[l] > LW'(WB_DEPTH)) err_c = 1'b1;
        if (t_q.size[l] == '0 || t_q.size[l] > lsize_t'(MAX_NEURONS)) err_c = 1'b1;
      end
    end
    if (t_q.n_layers == '0 || int'(t_q.n_layers) > MAX_LAYERS) err_c = 1'b1;
    if (t_q.size[0] == '0 || t_q.size[0] > lsize_t'(MAX_NEURONS)) err_c = 1'b1;
    if (net_lines * LW'(N_NETS) > LW'(CACHE_LINES)) err_c = 1'b1;
    if (net_lines * LW'(N_NETS) <= LW'(WB_DEPTH)) case_c = WS_ALL_RESIDENT;
    else if (net_lines <= LW'(WB_DEPTH))          case_c = WS_RELOAD;
    else                                          case_c = WS_LAYERWISE;
  end

  // sample state
  logic [SW-1:0] sel_q, prev_sel_q;
  logic                      prev_valid_q;
  logic                      res_valid_q;            // case 3: a network is resident
  logic [SW-1:0] res_sel_q;
  lcount_t                   layer_q;
  logic [LW-1:0]             g_q, k_q, cap_q, cnt_q;
  word_t                     act_q [MAX_NEURONS];
  word_t                     nxt_q [MAX_NEURONS];

  // weight load engine
  logic [CAW-1:0] ld_src_q;
  logic [WAW-1:0] ld_dst_q;
  logic [LW-1:0]  ld_left_q;
  logic           ld_wr_q;
  logic [WAW-1:0] ld_wa_q;

  logic [LW-1:0]  cur_k, cur_m;
  assign cur_k = LW'(t_q.size[layer_q - 1'b1]);
  assign cur_m = LW'(t_q.size[layer_q]);

  logic [LW-1:0] net_base;
  assign net_base = LW'(sel_q) * net_lines;

  logic [WAW-1:0] layer_wb_base;
  assign layer_wb_base = (wcase == WS_LAYERWISE) ? '0
                       : (wcase == WS_RELOAD)    ? WAW'(layer_off[layer_q])
                       : WAW'(net_base + layer_off[layer_q]);

  // combinational outputs
  always_comb begin
    cmd_ready   = (state == S_READY) && init_done && !start && !in_empty;
    in_pop      = 1'b0;
    out_push    = 1'b0;
    out_word    = '0;
    bus_valid   = 1'b0;
    bus_first   = 1'b0;
    bus_last    = 1'b0;
    bus_data    = '0;
    base_load   = 1'b0;
    base_addr   = layer_wb_base;
    cache_re    = (state == S_LOAD) && (ld_left_q != '0);
    cache_raddr = ld_src_q;
    wb_we       = ld_wr_q;
    wb_waddr    = ld_wa_q;
    wb_wdata    = cache_rdata;
    case (state)
      S_DROP, S_READIN: in_pop = !in_empty;
      S_CPU_OUT: begin
        out_push      = !out_full;
        out_word.cpu  = 1'b1;
        out_word.last = 1'b1;
        out_word.sel  = CLASS_CPU;
      end
      S_ISSUE: begin
        bus_valid = 1'b1;
        bus_first = (k_q == '0);
        bus_last  = (k_q == cur_k);
        bus_data  = (k_q == cur_k) ? ONE : act_q[k_q[$clog2(MAX_NEURONS)-1:0]];
        base_load = (g_q == '0) && (k_q == '0);
      end
      S_OUTPUT: begin
        out_push      = !out_full;
        out_word.last = (cnt_q == cur_m - 1'b1);
        out_word.sel  = class_t'(sel_q);
        out_word.data = act_q[cnt_q[$clog2(MAX_NEURONS)-1:0]];
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state         <= S_IDLE;
      load_ret      <= S_IDLE;
      t_q           <= '0;
      init_done     <= 1'b0;
      cfg_err       <= 1'b0;
      wcase         <= WS_ALL_RESIDENT;
      sel_q         <= '0;
      prev_sel_q    <= '0;
      prev_valid_q  <= 1'b0;
      res_valid_q   <= 1'b0;
      res_sel_q     <= '0;
      layer_q       <= '0;
      g_q           <= '0;
      k_q           <= '0;
      cap_q         <= '0;
      cnt_q         <= '0;
      ld_src_q      <= '0;
      ld_dst_q      <= '0;
      ld_left_q     <= '0;
      ld_wr_q       <= 1'b0;
      ld_wa_q       <= '0;
      ev_reload     <= 1'b0;
      ev_layer_load <= 1'b0;
      ev_switch     <= 1'b0;
      for (int i = 0; i < MAX_NEURONS; i++) begin
        act_q[i] <= '0;
        nxt_q[i] <= '0;
      end
    end else begin
      ev_reload     <= 1'b0;
      ev_layer_load <= 1'b0;
      ev_switch     <= 1'b0;

      // load engine write stage: cache data arrives one cycle after the read
      ld_wr_q <= cache_re;
      ld_wa_q <= ld_dst_q;
      if (cache_re) begin
        ld_src_q  <= ld_src_q + 1'b1;
        ld_dst_q  <= ld_dst_q + 1'b1;
        ld_left_q <= ld_left_q - 1'b1;
      end

      // PE results of the group in flight
      if (pe_out_valid[0]) begin
        for (int p = 0; p < NUM_PE; p++) begin
          logic [LW-1:0] n;
          n = cap_q * LW'(NUM_PE) + LW'(p);
          if (n < LW'(MAX_NEURONS)) nxt_q[n[$clog2(MAX_NEURONS)-1:0]] <= pe_out_data[p];
        end
        cap_q <= cap_q + 1'b1;
      end

      if (start && (state == S_IDLE || state == S_READY)) begin
        t_q          <= topo;
        state        <= S_LOAD;
        load_ret     <= S_READY;
        init_done    <= 1'b0;
        res_valid_q  <= 1'b0;
        prev_valid_q <= 1'b0;
        ld_src_q     <= '0;
        ld_dst_q     <= '0;
        ld_left_q    <= '0;   // sized in the next cycle, once topo is latched
        cnt_q        <= '1;   // marks "first cycle after start"
      end else case (state)
        S_IDLE: ;

        S_LOAD: begin
          if (cnt_q == '1) begin
            // first cycle after start: topology now latched
            cnt_q   <= '0;
            cfg_err <= err_c;
            wcase   <= case_c;
            if (err_c) state <= S_IDLE;
            else if (case_c == WS_ALL_RESIDENT) ld_left_q <= net_lines * LW'(N_NETS);
          end else if (ld_left_q == '0 && !ld_wr_q && !cache_re) begin
            state <= load_ret;
            if (load_ret == S_READY) init_done <= 1'b1;
          end
        end

        S_READY: if (cmd_valid && cmd_ready) begin
          cnt_q <= '0;
          if (cmd.to_cpu) begin
            state <= S_DROP;
          end else begin
            sel_q        <= $bits(sel_q)'(cmd.sel);
            prev_sel_q   <= $bits(sel_q)'(cmd.sel);
            prev_valid_q <= 1'b1;
            ev_switch    <= prev_valid_q && (prev_sel_q != $bits(sel_q)'(cmd.sel));
            if (wcase == WS_RELOAD && !(res_valid_q && res_sel_q == $bits(sel_q)'(cmd.sel))) begin
              ev_reload   <= 1'b1;
              res_valid_q <= 1'b1;
              res_sel_q   <= $bits(sel_q)'(cmd.sel);
              ld_src_q    <= CAW'(LW'($bits(sel_q)'(cmd.sel)) * net_lines);
              ld_dst_q    <= '0;
              ld_left_q   <= net_lines;
              load_ret    <= S_READIN;
              state       <= S_LOAD;
            end else begin
              state <= S_READIN;
            end
          end
        end

        S_DROP: if (!in_empty) begin
          cnt_q <= cnt_q + 1'b1;
          if (cnt_q == LW'(t_q.size[0]) - 1'b1) state <= S_CPU_OUT;
        end

        S_CPU_OUT: if (!out_full) state <= S_READY;

        S_READIN: if (!in_empty) begin
          act_q[cnt_q[$clog2(MAX_NEURONS)-1:0]] <= in_data;
          cnt_q <= cnt_q + 1'b1;
          if (cnt_q == LW'(t_q.size[0]) - 1'b1) begin
            layer_q <= lcount_t'(1);
            state   <= S_LAYER;
          end
        end

        S_LAYER: begin
          g_q   <= '0;
          k_q   <= '0;
          cap_q <= '0;
          if (wcase == WS_LAYERWISE) begin
            ev_layer_load <= 1'b1;
            ld_src_q  <= CAW'(net_base + layer_off[layer_q]);
            ld_dst_q  <= '0;
            ld_left_q <= layer_lines[layer_q];
            load_ret  <= S_ISSUE;
            state     <= S_LOAD;
          end else begin
            state <= S_ISSUE;
          end
        end

        S_ISSUE: begin
          if (k_q == cur_k) begin
            k_q <= '0;
            g_q <= g_q + 1'b1;
            if (g_q == groups[layer_q] - 1'b1) state <= S_DRAIN;
          end else begin
            k_q <= k_q + 1'b1;
          end
        end

        S_DRAIN: if (cap_q == groups[layer_q]) begin
          for (int i = 0; i < MAX_NEURONS; i++) act_q[i] <= nxt_q[i];
          if (layer_q == t_q.n_layers) begin
            cnt_q <= '0;
            state <= S_OUTPUT;
          end else begin
            layer_q <= layer_q + 1'b1;
            state   <= S_LAYER;
          end
        end

        S_OUTPUT: if (!out_full) begin
          cnt_q <= cnt_q + 1'b1;
          if (cnt_q == cur_m - 1'b1) state <= S_READY;
        end

        default: state <= S_IDLE;
      endcase
    end
  end

  // a command is only taken when the tile is ready
  a_cmd_when_ready: assert property (@(posedge clk) disable iff (!rst_n)
    (cmd_valid && cmd_ready) |-> init_done);
  // the PEs return results only for groups that were issued
  a_capture_bound: assert property (@(posedge clk) disable iff (!rst_n)
    pe_out_valid[0] |-> (cap_q < LW'(GMAX)));
endmodule
