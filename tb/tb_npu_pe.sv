// tb_npu_pe -- self-checking test of npu_pe.
// Fills the PE's weight buffer with three networks' worth of random weights,
// then evaluates neurons back to back from different start addresses. Each
// result is compared with the reference sigmoid of the integer dot product,
// and its arrival is checked to be exactly 3 cycles after the last term.
module tb_npu_pe;
  import mcma_pkg::*;
  import tb_ref_pkg::*;
  localparam int D = 512;
  logic clk = 0, rst_n = 0;
  logic wb_we, base_load, bus_valid, bus_first, bus_last, out_valid;
  logic [8:0] wb_waddr, base_addr;
  word_t wb_wdata, bus_data, out_data;
  int checks = 0, failures = 0;
  int wmem [D];
  int expq[$], exp_cyc[$];
  int cyc = 0;

  npu_pe #(.WB_DEPTH(D)) dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // result checker
  always @(posedge clk) if (rst_n && out_valid) begin
    checks += 2;
    if (expq.size() == 0) begin failures += 2; $display("FAIL unexpected output"); end
    else begin
      automatic int e = expq.pop_front();
      automatic int c = exp_cyc.pop_front();
      if (int'(out_data) != e) begin failures++; $display("FAIL value %0d != %0d", out_data, e); end
      if (cyc != c) begin failures++; $display("FAIL latency cycle %0d != %0d", cyc, c); end
    end
  end

  initial begin
    wb_we = 0; base_load = 0; bus_valid = 0; bus_first = 0; bus_last = 0;
    wb_waddr = 0; base_addr = 0; wb_wdata = 0; bus_data = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int a = 0; a < D; a++) begin
      @(negedge clk);
      wb_we = 1; wb_waddr = a[8:0];
      wmem[a] = int'($urandom_range(512)) - 256;
      wb_wdata = word_t'(wmem[a]);
    end
    @(negedge clk); wb_we = 0;
    for (int r = 0; r < 30; r++) begin
      automatic int base = (r % 3) * 160;
      automatic int ptr = base;
      automatic int nneur = $urandom_range(4, 1);
      for (int n = 0; n < nneur; n++) begin
        automatic int k = $urandom_range(20, 1);
        automatic int acc = 0;
        for (int t = 0; t <= k; t++) begin
          automatic int x = (t == k) ? 256 : int'($urandom_range(512)) - 256;
          @(negedge clk);
          bus_valid = 1; bus_first = (t == 0); bus_last = (t == k);
          bus_data = word_t'(x);
          base_load = (n == 0 && t == 0); base_addr = base[8:0];
          acc += wmem[ptr] * x;
          ptr++;
          if (t == k) begin
            expq.push_back(sig_ref(acc));
            exp_cyc.push_back(cyc + 3);
          end
        end
      end
      @(negedge clk); bus_valid = 0; bus_first = 0; bus_last = 0; base_load = 0;
      repeat ($urandom_range(3)) @(negedge clk);
    end
    repeat (6) @(posedge clk);
    checks++;
    if (expq.size() != 0) begin failures++; $display("FAIL missing outputs"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
