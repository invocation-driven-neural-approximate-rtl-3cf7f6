// tb_mcma_npu_top -- end-to-end test of the MCMA NPU at its default size.
//
// Three phases, each with its own classifier and approximator topologies from
// the benchmark table: Bessel (classifier 2-4-4, approximators 2-4-4-1, all
// weights resident), JPEG (64-16-4 and 64-16-64, one approximator resident,
// reload on switch) and a 64-56-64 approximator set that needs layer-by-layer
// loading. Random classifier and approximator weights are written to the two
// caches; a stream of random samples is pushed while results are drained with
// random back-pressure. For each sample the testbench computes the classifier
// outputs, picks the largest (ties to the lower index) and expects either that
// approximator's outputs or a CPU marker, in input order. It counts how often
// each mechanism happened: each approximator invoked, CPU fallback, switch
// between approximators, case-3 reload, case-2 layer load, input stall and
// output back-pressure; one that never happened is a failure. The invocation
// counters of the controller are checked against the expected routing.
module tb_mcma_npu_top;
  import mcma_pkg::*;
  import tb_ref_pkg::*;
  localparam int P = 8;

  logic clk = 0, rst_n = 0;
  topo_t cls_topo, apx_topo;
  logic start = 0, ready, cfg_err;
  wsw_case_e apx_wcase;
  logic cw_we = 0, cw_tile = 0;
  logic [11:0] cw_addr = 0;
  word_t [P-1:0] cw_data;
  logic in_valid = 0, in_ready;
  word_t in_data = 0;
  logic out_valid, out_ready;
  out_word_t out_word;
  logic [31:0] n_invoked [N_APPROX];
  logic [31:0] n_cpu;
  logic ev_reload, ev_layer_load, ev_switch;

  mcma_npu_top dut (.*);
  always #5 clk = ~clk;

  int checks = 0, failures = 0, cyc = 0;
  int c_invoke[N_APPROX], c_cpu = 0, c_reload = 0, c_layer = 0, c_switch = 0;
  int c_stall = 0, c_backpressure = 0, exp_inv[N_APPROX], exp_cpu = 0;
  wts_t wc, wa;
  int cs[MAXL+1], as_[MAXL+1];
  int cnl, anl;
  out_word_t expq[$];
  bit busy_out = 0;

  always @(posedge clk) cyc <= cyc + 1;
  always @(posedge clk) if (rst_n) begin
    if (ev_reload) c_reload++;
    if (ev_layer_load) c_layer++;
    if (ev_switch) c_switch++;
    if (in_valid && !in_ready) c_stall++;
    if (out_valid && !out_ready) c_backpressure++;
  end

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s (cycle %0d)", what, cyc); end
  endtask

  // output side: random back-pressure, in-order compare
  always @(negedge clk) out_ready <= ($urandom_range(9) < 7);
  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    out_word_t e;
    if (expq.size() == 0) chk(0, "unexpected output");
    else begin
      e = expq.pop_front();
      chk(out_word == e, $sformatf("output got %h expected %h", out_word, e));
      if (out_word.last) begin
        if (out_word.cpu) c_cpu++;
        else if (int'(out_word.sel) < N_APPROX) c_invoke[out_word.sel]++;
      end
    end
  end

  task automatic set_topo(ref topo_t t, input int nl, input int s[MAXL+1]);
    t.n_layers = lcount_t'(nl);
    for (int l = 0; l <= MAXL; l++) t.size[l] = lsize_t'(s[l]);
  endtask

  task automatic write_cache(bit tile, ref wts_t w, input int nnets, input int nl, input int s[MAXL+1]);
    int lines;
    lines = net_lines(P, nl, s);
    for (int a = 0; a < nnets * lines; a++) begin
      @(negedge clk);
      cw_we = 1; cw_tile = tile; cw_addr = a[11:0];
      for (int p = 0; p < P; p++) cw_data[p] = word_t'(cache_word(w, a / lines, P, nl, s, a % lines, p));
    end
    @(negedge clk); cw_we = 0;
  endtask

  task automatic phase(string name, int cnl_i, int c0, int c1, int c2, int anl_i,
                       int a0, int a1, int a2, int a3, wsw_case_e exp_case, int nsamp);
    cnl = cnl_i; cs[0] = c0; cs[1] = c1; cs[2] = c2; cs[3] = 0;
    anl = anl_i; as_[0] = a0; as_[1] = a1; as_[2] = a2; as_[3] = a3;
    // pick classifier weights whose decisions spread over all four classes
    for (int tries = 0; tries < 200; tries++) begin
      int hist[N_CLASS];
      bit ok;
      rand_weights(wc, 48 + tries);
      // steeper first layer and no output bias, so the inputs decide the class
      for (int n = 0; n < MAXN; n++) begin
        for (int k = 0; k <= MAXN; k++) wc[0][1][n][k] *= 4;
        wc[0][cnl][n][cs[cnl-1]] = 0;
      end
      foreach (hist[c]) hist[c] = 0;
      for (int t = 0; t < 64; t++) begin
        int xt[MAXN], yt[MAXN];
        int b;
        for (int i = 0; i < c0; i++) xt[i] = int'($urandom_range(512)) - 256;
        net_eval(wc, 0, cnl, cs, xt, yt);
        b = 0;
        for (int c = 1; c < N_CLASS; c++) if (yt[c] > yt[b]) b = c;
        hist[b]++;
      end
      ok = 1;
      foreach (hist[c]) if (hist[c] < 6) ok = 0;
      if (ok || tries == 199) begin $display("%s: classifier weights after %0d tries, class histogram %0d %0d %0d %0d", name, tries, hist[0], hist[1], hist[2], hist[3]); break; end
    end
    rand_weights(wa, 96);
    write_cache(0, wc, 1, cnl, cs);
    write_cache(1, wa, 3, anl, as_);
    set_topo(cls_topo, cnl, cs);
    set_topo(apx_topo, anl, as_);
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    while (!ready && !cfg_err) @(negedge clk);
    chk(!cfg_err, {name, ": configuration accepted"});
    chk(apx_wcase == exp_case, {name, ": weight-switch case"});
    for (int s = 0; s < nsamp; s++) begin
      int x[MAXN], yc[MAXN], ya[MAXN];
      int best;
      out_word_t e;
      for (int i = 0; i < cs[0]; i++) x[i] = int'($urandom_range(512)) - 256;
      net_eval(wc, 0, cnl, cs, x, yc);
      best = 0;
      for (int c = 1; c < N_CLASS; c++) if (yc[c] > yc[best]) best = c;
      if (best == N_APPROX) begin
        e = '0; e.cpu = 1; e.last = 1; e.sel = CLASS_CPU;
        expq.push_back(e);
        exp_cpu++;
      end else begin
        net_eval(wa, best, anl, as_, x, ya);
        for (int i = 0; i < as_[anl]; i++) begin
          e = '0; e.last = (i == as_[anl] - 1); e.sel = class_t'(best); e.data = word_t'(ya[i]);
          expq.push_back(e);
        end
        exp_inv[best]++;
      end
      for (int i = 0; i < cs[0]; i++) begin
        @(negedge clk);
        in_valid = 1; in_data = word_t'(x[i]);
        while (!in_ready) @(negedge clk);
      end
      @(negedge clk); in_valid = 0;
    end
    while (expq.size() != 0) @(negedge clk);
    repeat (5) @(negedge clk);
    $display("%s done at cycle %0d", name, cyc);
  endtask

  initial begin
    for (int p = 0; p < P; p++) cw_data[p] = '0;
    cls_topo = '0; apx_topo = '0;
    foreach (exp_inv[i]) begin exp_inv[i] = 0; c_invoke[i] = 0; end
    repeat (3) @(negedge clk); rst_n = 1;

    phase("bessel", 2, 2, 4, 4, 3, 2, 4, 4, 1, WS_ALL_RESIDENT, 120);
    phase("jpeg",   2, 64, 16, 4, 2, 64, 16, 64, 0, WS_RELOAD, 12);
    phase("large",  2, 64, 16, 4, 2, 64, 56, 64, 0, WS_LAYERWISE, 6);

    // a classifier with the wrong number of outputs is refused
    cls_topo.size[2] = lsize_t'(N_CLASS - 1);
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    repeat (400) @(negedge clk);
    chk(cfg_err && !ready, "classifier with too few outputs refused");
    cls_topo.size[2] = lsize_t'(N_CLASS);
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    while (!ready && !cfg_err) @(negedge clk);
    chk(!cfg_err && ready, "valid configuration accepted again");

    for (int i = 0; i < N_APPROX; i++) begin
      chk(c_invoke[i] > 0, $sformatf("approximator %0d invoked", i));
      chk(int'(n_invoked[i]) == exp_inv[i], $sformatf("invocation counter %0d: %0d vs %0d", i, n_invoked[i], exp_inv[i]));
    end
    chk(c_cpu > 0, "CPU fallback happened");
    chk(int'(n_cpu) == exp_cpu, "CPU counter");
    chk(c_switch > 0, "approximator switch happened");
    chk(c_reload > 0, "case-3 weight reload happened");
    chk(c_layer > 0, "case-2 layer-by-layer load happened");
    chk(c_stall > 0, "input stall happened");
    chk(c_backpressure > 0, "output back-pressure happened");
    $display("invoked %0d %0d %0d cpu %0d switches %0d reloads %0d layer_loads %0d stalls %0d backpressure %0d",
             c_invoke[0], c_invoke[1], c_invoke[2], c_cpu, c_switch, c_reload, c_layer, c_stall, c_backpressure);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
