// tb_fetch_unit -- self-checking test of fetch_unit with a weight_buffer.
// Loads start addresses of three weight regions and steps through them with
// gaps; checks every W register value against the expected address sequence
// and that w_valid follows step by one cycle.
module tb_fetch_unit;
  localparam int D = 512, W = 16;
  logic clk = 0, rst_n = 0;
  logic base_load, step, rd_en, w_valid;
  logic [8:0] base_addr, rd_addr;
  logic [W-1:0] rd_data, w_reg;
  int checks = 0, failures = 0;

  // buffer holds its own address plus 1000, so the value names the address read
  logic we = 0;
  logic [8:0] waddr = 0;
  logic [W-1:0] wdata = 0;
  weight_buffer #(.DEPTH(D), .W(W)) u_buf (.clk, .we, .waddr, .wdata,
    .re(rd_en), .raddr(rd_addr), .rdata(rd_data));
  fetch_unit #(.DEPTH(D), .W(W)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    int expect_addr;
    base_load = 0; step = 0; base_addr = 0;
    for (int a = 0; a < D; a++) begin
      @(negedge clk); we = 1; waddr = a[8:0]; wdata = W'(a + 1000);
    end
    @(negedge clk); we = 0; rst_n = 1;
    for (int r = 0; r < 6; r++) begin
      automatic int base = (r % 3) * 150 + r;
      expect_addr = base;
      for (int i = 0; i < 60; i++) begin
        automatic bit s = (i == 0) || ($urandom_range(3) != 0);
        @(negedge clk);
        base_load = (i == 0); base_addr = base[8:0]; step = s;
        @(posedge clk); #1;
        chk(w_valid == s, "w_valid follows step");
        if (s) begin
          chk(int'(w_reg) == expect_addr + 1000, "weight sequence");
          expect_addr++;
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
