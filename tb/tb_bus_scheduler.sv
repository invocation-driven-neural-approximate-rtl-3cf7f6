// tb_bus_scheduler -- self-checking test of bus_scheduler on its own.
//
// The cache, the input and output FIFOs and the PEs are behavioural models in
// this testbench: the cache answers one cycle after a read, each PE model keeps
// the words written into its weight buffer, follows base_load and the bus, and
// returns sigmoid(sum) three cycles after the last term. For three topologies
// (one per weight-switch case) the test runs random samples and commands and
// checks the results, and it counts the cache lines read per sample: none in
// case 1, a whole network only when the approximator changes in case 3, and a
// whole network, layer by layer, for every sample in case 2.
module tb_bus_scheduler;
  import mcma_pkg::*;
  import tb_ref_pkg::*;
  localparam int P = 8, WBD = 512, CL = 4096;

  logic clk = 0, rst_n = 0;
  topo_t topo;
  logic start = 0, init_done, cfg_err;
  wsw_case_e wcase;
  logic cmd_valid = 0, cmd_ready;
  apx_cmd_t cmd;
  logic in_empty, in_pop;
  word_t in_data;
  logic out_full = 0, out_push;
  out_word_t out_word;
  logic cache_re;
  logic [11:0] cache_raddr;
  word_t [P-1:0] cache_rdata;
  logic wb_we, base_load, bus_valid, bus_first, bus_last;
  logic [8:0] wb_waddr, base_addr;
  word_t [P-1:0] wb_wdata;
  word_t bus_data;
  logic [P-1:0] pe_out_valid;
  word_t [P-1:0] pe_out_data;
  logic ev_reload, ev_layer_load, ev_switch;

  bus_scheduler #(.NUM_PE(P), .WB_DEPTH(WBD), .CACHE_LINES(CL), .N_NETS(3)) dut (.*);
  always #5 clk = ~clk;

  int checks = 0, failures = 0, cyc = 0, lines_read = 0;
  wts_t w;
  int sizes[MAXL+1];
  int nl;
  word_t inq[$];
  out_word_t expq[$];

  // behavioural cache
  word_t [P-1:0] cmem [CL];
  always @(posedge clk) if (cache_re) begin
    cache_rdata <= cmem[cache_raddr];
    lines_read++;
  end

  // behavioural input FIFO
  always @(negedge clk) begin
    in_empty = (inq.size() == 0);
    in_data  = in_empty ? word_t'(0) : inq[0];
  end
  always @(posedge clk) if (rst_n && in_pop) void'(inq.pop_front());

  // behavioural PEs
  int wbm [P][WBD];
  int ptr [P];
  int acc [P];
  int res_q[$], res_cyc[$];
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (wb_we) for (int p = 0; p < P; p++) wbm[p][wb_waddr] = int'(wb_wdata[p]);
    if (bus_valid) begin
      for (int p = 0; p < P; p++) begin
        if (base_load) ptr[p] = int'(base_addr);
        acc[p] = (bus_first ? 0 : acc[p]) + wbm[p][ptr[p]] * int'(bus_data);
        ptr[p]++;
        if (bus_last) begin res_q.push_back(sig_ref(acc[p])); res_cyc.push_back(cyc + 3); end
      end
    end
  end
  always @(negedge clk) begin
    pe_out_valid = '0;
    if (res_cyc.size() >= P && res_cyc[0] == cyc) begin
      pe_out_valid = '1;
      for (int p = 0; p < P; p++) begin
        pe_out_data[p] = word_t'(res_q.pop_front());
        void'(res_cyc.pop_front());
      end
    end
  end

  // output monitor
  always @(posedge clk) if (rst_n && out_push) begin
    out_word_t e;
    if (expq.size() == 0) chk(0, "unexpected output");
    else begin
      e = expq.pop_front();
      chk(out_word == e, $sformatf("output got %h expected %h", out_word, e));
    end
  end

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s (cycle %0d)", what, cyc); end
  endtask

  task automatic configure(int nlay, int s0, int s1, int s2, wsw_case_e exp_case);
    int lines;
    nl = nlay; sizes[0] = s0; sizes[1] = s1; sizes[2] = s2; sizes[3] = 0;
    lines = net_lines(P, nl, sizes);
    for (int a = 0; a < 3 * lines; a++)
      for (int p = 0; p < P; p++) cmem[a][p] = word_t'(cache_word(w, a / lines, P, nl, sizes, a % lines, p));
    topo.n_layers = lcount_t'(nl);
    for (int l = 0; l <= MAXL; l++) topo.size[l] = lsize_t'(sizes[l]);
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    while (!init_done && !cfg_err) @(negedge clk);
    chk(!cfg_err && wcase == exp_case, $sformatf("case %0d chosen", exp_case));
  endtask

  // one sample; returns the number of cache lines read while it ran
  task automatic sample(bit to_cpu, int sel, output int nread);
    int x[MAXN], y[MAXN];
    out_word_t e;
    int r0;
    for (int i = 0; i < sizes[0]; i++) begin
      x[i] = int'($urandom_range(512)) - 256;
      inq.push_back(word_t'(x[i]));
    end
    if (to_cpu) begin
      e = '0; e.cpu = 1; e.last = 1; e.sel = CLASS_CPU; expq.push_back(e);
    end else begin
      net_eval(w, sel, nl, sizes, x, y);
      for (int i = 0; i < sizes[nl]; i++) begin
        e = '0; e.last = (i == sizes[nl] - 1); e.sel = class_t'(sel); e.data = word_t'(y[i]);
        expq.push_back(e);
      end
    end
    r0 = lines_read;
    @(negedge clk);
    cmd_valid = 1; cmd.to_cpu = to_cpu; cmd.sel = class_t'(sel);
    @(posedge clk); while (!cmd_ready) @(posedge clk);
    @(negedge clk); cmd_valid = 0;
    while (expq.size() != 0) @(negedge clk);
    nread = lines_read - r0;
  endtask

  initial begin
    int n, lines;
    rand_weights(w, 96);
    cmd = '0; topo = '0;
    for (int p = 0; p < P; p++) pe_out_data[p] = '0;
    repeat (3) @(negedge clk); rst_n = 1;

    configure(2, 6, 8, 1, WS_ALL_RESIDENT);
    for (int s = 0; s < 12; s++) begin
      sample(s % 5 == 4, s % 3, n);
      chk(n == 0, "case 1: no weight traffic per sample");
    end

    configure(2, 64, 16, 64, WS_RELOAD);
    lines = net_lines(P, nl, sizes);
    sample(0, 1, n); chk(n == lines, "case 3: first use loads the network");
    sample(0, 1, n); chk(n == 0, "case 3: same approximator, no reload");
    sample(1, 0, n); chk(n == 0, "case 3: CPU sample, no reload");
    sample(0, 2, n); chk(n == lines, "case 3: switch reloads");
    sample(0, 0, n); chk(n == lines, "case 3: switch reloads again");

    configure(2, 64, 56, 64, WS_LAYERWISE);
    lines = net_lines(P, nl, sizes);
    for (int s = 0; s < 4; s++) begin
      sample(0, s % 3, n);
      chk(n == lines, "case 2: every sample loads each layer");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
