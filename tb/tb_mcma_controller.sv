// tb_mcma_controller -- self-checking test of mcma_controller.
// Feeds groups of N_CLASS classifier words (random values, frequent ties,
// gaps between words) and accepts commands with random delays. Each command
// must name the class with the largest value (lowest index on ties), with
// to_cpu set for the last class; commands must come one per sample, in order;
// the invocation counters must match at the end.
module tb_mcma_controller;
  import mcma_pkg::*;
  logic clk = 0, rst_n = 0;
  logic cls_valid = 0, cls_pop, cmd_valid, cmd_ready = 0;
  out_word_t cls_word;
  apx_cmd_t cmd;
  logic [31:0] n_invoked [N_APPROX];
  logic [31:0] n_cpu;
  int checks = 0, failures = 0;
  int expq[$];
  int exp_inv[N_APPROX], exp_cpu = 0, ncmd = 0;

  mcma_controller dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  // command sink
  always @(negedge clk) cmd_ready <= ($urandom_range(2) == 0);
  always @(posedge clk) if (rst_n && cmd_valid && cmd_ready) begin
    int e;
    ncmd++;
    if (expq.size() == 0) chk(0, "unexpected command");
    else begin
      e = expq.pop_front();
      chk(cmd.to_cpu == (e == N_APPROX), "to_cpu flag");
      if (e != N_APPROX) chk(int'(cmd.sel) == e, $sformatf("selected %0d expected %0d", cmd.sel, e));
    end
  end

  initial begin
    foreach (exp_inv[i]) exp_inv[i] = 0;
    cls_word = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int s = 0; s < 400; s++) begin
      int v[N_CLASS];
      int best;
      for (int c = 0; c < N_CLASS; c++) v[c] = (s % 3 == 0) ? $urandom_range(3) * 64 : $urandom_range(256);
      best = 0;
      for (int c = 1; c < N_CLASS; c++) if (v[c] > v[best]) best = c;
      expq.push_back(best);
      if (best == N_APPROX) exp_cpu++; else exp_inv[best]++;
      for (int c = 0; c < N_CLASS; c++) begin
        @(negedge clk);
        while ($urandom_range(3) == 0) begin cls_valid = 0; @(negedge clk); end
        cls_valid = 1;
        cls_word = '0; cls_word.data = word_t'(v[c]); cls_word.last = (c == N_CLASS - 1);
        @(posedge clk);
        while (!cls_pop) @(posedge clk);
      end
      @(negedge clk); cls_valid = 0;
    end
    while (expq.size() != 0) @(negedge clk);
    repeat (3) @(negedge clk);
    chk(ncmd == 400, "one command per sample");
    for (int i = 0; i < N_APPROX; i++) chk(int'(n_invoked[i]) == exp_inv[i], "invocation counter");
    chk(int'(n_cpu) == exp_cpu, "cpu counter");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
