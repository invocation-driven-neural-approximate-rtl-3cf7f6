// tb_weight_buffer -- self-checking test of weight_buffer.
// Fills the buffer, reads it back in random order with the one-cycle read
// latency, and checks that a read in the same cycle as a write to the same
// address returns the old word.
module tb_weight_buffer;
  localparam int D = 512, W = 16;
  logic clk = 0;
  logic we, re;
  logic [$clog2(D)-1:0] waddr, raddr;
  logic [W-1:0] wdata, rdata;
  logic [W-1:0] model [D];
  int checks = 0, failures = 0;

  weight_buffer #(.DEPTH(D), .W(W)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    we = 0; re = 0; waddr = 0; raddr = 0; wdata = 0;
    for (int a = 0; a < D; a++) begin
      @(negedge clk);
      we = 1; waddr = a[8:0]; wdata = W'($urandom); model[a] = wdata;
    end
    @(negedge clk); we = 0;
    for (int i = 0; i < 1500; i++) begin
      automatic int a = $urandom_range(D - 1);
      @(negedge clk);
      re = 1; raddr = a[8:0];
      // write the same address in the same cycle half of the time
      we = (i % 2 == 0); waddr = a[8:0]; wdata = W'($urandom);
      @(posedge clk); #1;
      checks++;
      if (rdata !== model[a]) begin failures++; $display("FAIL addr %0d", a); end
      if (we) model[a] = wdata;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
