// tb_npu_tile -- self-checking test of npu_tile (approximator configuration).
//
// For four topologies taken from the benchmark table (6-8-1, 18-32-16-2,
// 64-16-64 and a 64-56-64 network that exceeds one weight buffer) the test
// writes three random networks into the cache, starts the tile, checks which
// weight-switch case it chose, and runs random samples with random commands
// (approximator 0..2 or CPU). Every output word is compared with the
// reference network model, in order. It also checks the cycle count of one
// sample against the schedule: first result word
// 2 + size0 + sum over layers (5 + ceil(M/8)*(K+1)) cycles after the command.
module tb_npu_tile;
  import mcma_pkg::*;
  import tb_ref_pkg::*;
  localparam int P = 8, WBD = 512, CL = 4096;

  logic clk = 0, rst_n = 0;
  topo_t topo;
  logic start = 0, init_done, cfg_err;
  wsw_case_e wcase;
  logic cw_we = 0;
  logic [11:0] cw_addr = 0;
  word_t [P-1:0] cw_data;
  logic in_valid = 0, in_ready;
  word_t in_data = 0;
  logic cmd_valid = 0, cmd_ready;
  apx_cmd_t cmd;
  logic out_valid, out_pop;
  out_word_t out_word;
  logic ev_reload, ev_layer_load, ev_switch;

  npu_tile #(.NUM_PE(P), .WB_DEPTH(WBD), .CACHE_LINES(CL), .FIFO_DEPTH(64), .N_NETS(3)) dut (.*);
  always #5 clk = ~clk;

  int checks = 0, failures = 0, cyc = 0;
  int n_reload = 0, n_layer_load = 0, n_switch = 0;
  wts_t w;
  int sizes[MAXL+1];
  int nl;
  out_word_t expq[$];
  bit pop_rand = 1;

  always @(posedge clk) cyc <= cyc + 1;
  always @(posedge clk) if (rst_n) begin
    if (ev_reload) n_reload++;
    if (ev_layer_load) n_layer_load++;
    if (ev_switch) n_switch++;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s (cycle %0d)", what, cyc); end
  endtask

  assign out_pop = out_valid && (!pop_rand || ($urandom_range(9) < 8));
  always @(posedge clk) if (rst_n && out_pop) begin
    out_word_t e;
    if (expq.size() == 0) chk(0, "unexpected output");
    else begin
      e = expq.pop_front();
      chk(out_word == e, $sformatf("output word got %h exp %h", out_word, e));
    end
  end

  task automatic configure(int nlay, int s0, int s1, int s2, int s3, wsw_case_e exp_case);
    int lines;
    nl = nlay; sizes[0] = s0; sizes[1] = s1; sizes[2] = s2; sizes[3] = s3;
    lines = net_lines(P, nl, sizes);
    for (int a = 0; a < 3 * lines; a++) begin
      @(negedge clk);
      cw_we = 1; cw_addr = a[11:0];
      for (int p = 0; p < P; p++) cw_data[p] = word_t'(cache_word(w, a / lines, P, nl, sizes, a % lines, p));
    end
    @(negedge clk);
    cw_we = 0;
    topo.n_layers = lcount_t'(nl);
    for (int l = 0; l <= MAXL; l++) topo.size[l] = lsize_t'(sizes[l]);
    start = 1;
    @(negedge clk); start = 0;
    while (!init_done && !cfg_err) @(negedge clk);
    chk(!cfg_err, "configuration accepted");
    chk(wcase == exp_case, $sformatf("weight-switch case %0d", exp_case));
  endtask

  task automatic push_sample(output int x[MAXN]);
    for (int i = 0; i < sizes[0]; i++) begin
      x[i] = int'($urandom_range(512)) - 256;
      @(negedge clk);
      in_valid = 1; in_data = word_t'(x[i]);
      while (!in_ready) @(negedge clk);
    end
    @(negedge clk); in_valid = 0;
  endtask

  task automatic send_cmd(bit to_cpu, int sel, int x[MAXN]);
    int y[MAXN];
    out_word_t e;
    if (to_cpu) begin
      e = '0; e.cpu = 1; e.last = 1; e.sel = CLASS_CPU;
      expq.push_back(e);
    end else begin
      net_eval(w, sel, nl, sizes, x, y);
      for (int i = 0; i < sizes[nl]; i++) begin
        e = '0; e.last = (i == sizes[nl] - 1); e.sel = class_t'(sel); e.data = word_t'(y[i]);
        expq.push_back(e);
      end
    end
    @(negedge clk);
    cmd_valid = 1; cmd.to_cpu = to_cpu; cmd.sel = class_t'(sel);
    @(posedge clk);
    while (!cmd_ready) @(posedge clk);
    @(negedge clk); cmd_valid = 0;
  endtask

  task automatic run_samples(int n);
    int x[MAXN];
    for (int s = 0; s < n; s++) begin
      bit cpu = ($urandom_range(4) == 0);
      int sel = (s < 3) ? s : $urandom_range(2);
      push_sample(x);
      send_cmd(cpu, sel, x);
    end
    while (expq.size() != 0) @(negedge clk);
  endtask

  // latency of one sample with its input already queued and the output drained
  task automatic latency_check(int sel);
    int x[MAXN];
    int c0, exp_lat;
    pop_rand = 0;
    push_sample(x);
    repeat (3) @(negedge clk);
    fork
      send_cmd(0, sel, x);
      begin
        @(posedge clk iff (cmd_valid && cmd_ready));
        c0 = cyc;
      end
    join
    @(posedge clk iff out_valid);
    exp_lat = 2 + sizes[0];
    for (int l = 1; l <= nl; l++) exp_lat += 5 + ((sizes[l] + P - 1) / P) * (sizes[l-1] + 1);
    chk(cyc - c0 == exp_lat, $sformatf("latency %0d expected %0d", cyc - c0, exp_lat));
    while (expq.size() != 0) @(negedge clk);
    pop_rand = 1;
  endtask

  initial begin
    int r0, l0;
    rand_weights(w, 96);
    cmd = '0;
    for (int p = 0; p < P; p++) cw_data[p] = '0;
    repeat (3) @(negedge clk); rst_n = 1;

    configure(2, 6, 8, 1, 0, WS_ALL_RESIDENT);         // Black-Scholes approximator
    latency_check(1);
    run_samples(20);
    configure(3, 18, 32, 16, 2, WS_ALL_RESIDENT);      // jmeint approximator
    latency_check(2);
    run_samples(12);
    chk(n_reload == 0 && n_layer_load == 0, $sformatf("case 1 loads nothing per sample %0d %0d", n_reload, n_layer_load));
    configure(2, 64, 16, 64, 0, WS_RELOAD);            // JPEG approximator
    r0 = n_reload;
    run_samples(10);
    chk(n_reload > r0, "case 3 reloads on a switch");
    configure(2, 64, 56, 64, 0, WS_LAYERWISE);         // larger than one buffer
    l0 = n_layer_load;
    run_samples(5);
    chk(n_layer_load > l0, "case 2 loads layer by layer");
    chk(n_switch > 0, "approximator switches happened");
    $display("reloads=%0d layer_loads=%0d switches=%0d", n_reload, n_layer_load, n_switch);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
