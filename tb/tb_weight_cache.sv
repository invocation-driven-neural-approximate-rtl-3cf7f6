// tb_weight_cache -- self-checking test of weight_cache.
// Writes random lines, reads them back at random with the one-cycle latency,
// checking all NUM_PE words of each line.
module tb_weight_cache;
  import mcma_pkg::*;
  localparam int L = 4096, P = 8;
  logic clk = 0, we = 0, re = 0;
  logic [11:0] waddr = 0, raddr = 0;
  word_t [P-1:0] wdata, rdata;
  word_t [P-1:0] model [L];
  int checks = 0, failures = 0;

  weight_cache #(.LINES(L), .NUM_PE(P)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (30000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int a = 0; a < L; a++) begin
      @(negedge clk);
      we = 1; waddr = a[11:0];
      for (int p = 0; p < P; p++) wdata[p] = word_t'($urandom);
      model[a] = wdata;
    end
    @(negedge clk); we = 0;
    for (int n = 0; n < 2000; n++) begin
      automatic int a = $urandom_range(L - 1);
      @(negedge clk); re = 1; raddr = a[11:0];
      @(posedge clk); #1;
      for (int p = 0; p < P; p++) begin
        checks++;
        if (rdata[p] !== model[a][p]) begin failures++; $display("FAIL line %0d word %0d", a, p); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
