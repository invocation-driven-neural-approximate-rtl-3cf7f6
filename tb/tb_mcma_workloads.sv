// tb_mcma_workloads -- the eight benchmark network shapes on the MCMA NPU.
//
// Runs the classifier and approximator topologies of the paper's benchmark
// table (Black-Scholes, FFT, inversek2j, jmeint, JPEG, k-means, Sobel,
// Bessel; the classifiers with their four MCMA outputs) through the design
// at its default size, with random weights and random inputs, since the
// trained networks are not available. Each sample's routing (approximator or
// CPU) and every output word are compared with the reference model, and the
// weight-switch case the approximator tile picks is checked against the
// expected one (case 3 for JPEG, case 1 for the rest).
module tb_mcma_workloads;
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

  task automatic phase(string name, int cnl_i, int ct[MAXL+1], int anl_i, int at[MAXL+1],
                       wsw_case_e exp_case, int nsamp);
    int c0;
    cnl = cnl_i; cs = ct; anl = anl_i; as_ = at; c0 = ct[0];
    // pick classifier weights whose decisions spread over all four classes
    for (int tries = 0; tries < 200; tries++) begin
      int hist[N_CLASS];
      bit ok;
      rand_weights(wc, 48 + tries);
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
      if (ok) break;
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

    phase("black-scholes", 2, '{6, 8, 4, 0},   2, '{6, 8, 1, 0},    WS_ALL_RESIDENT, 16);
    phase("fft",           2, '{1, 2, 4, 0},   3, '{1, 2, 2, 2},    WS_ALL_RESIDENT, 16);
    phase("inversek2j",    2, '{2, 8, 4, 0},   2, '{2, 8, 2, 0},    WS_ALL_RESIDENT, 16);
    phase("jmeint",        2, '{18, 16, 4, 0}, 3, '{18, 32, 16, 2}, WS_ALL_RESIDENT, 12);
    phase("jpeg",          2, '{64, 16, 4, 0}, 2, '{64, 16, 64, 0}, WS_RELOAD, 8);
    phase("k-means",       3, '{6, 8, 4, 4},   3, '{6, 8, 4, 1},    WS_ALL_RESIDENT, 16);
    phase("sobel",         2, '{9, 8, 4, 0},   2, '{9, 8, 1, 0},    WS_ALL_RESIDENT, 16);
    phase("bessel",        2, '{2, 4, 4, 0},   3, '{2, 4, 4, 1},    WS_ALL_RESIDENT, 16);
    chk(c_cpu + c_invoke[0] + c_invoke[1] + c_invoke[2] == 16 * 6 + 12 + 8, "every sample answered");
    $display("invoked %0d %0d %0d cpu %0d", c_invoke[0], c_invoke[1], c_invoke[2], c_cpu);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
