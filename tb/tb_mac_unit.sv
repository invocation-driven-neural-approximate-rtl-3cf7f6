// tb_mac_unit -- self-checking test of mac_unit.
// Random dot products of random length with idle cycles in between; the
// accumulator is compared with an integer sum after every term.
module tb_mac_unit;
  import mcma_pkg::*;
  logic clk = 0, rst_n = 0, en, first;
  word_t w, i;
  acc_t acc;
  int checks = 0, failures = 0;

  mac_unit dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int sum;
    en = 0; first = 0; w = 0; i = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int n = 0; n < 200; n++) begin
      automatic int len = $urandom_range(20, 1);
      sum = 0;
      for (int k = 0; k < len; k++) begin
        @(negedge clk);
        en = 1; first = (k == 0);
        w = word_t'(int'($urandom_range(4000)) - 2000);
        i = word_t'(int'($urandom_range(4000)) - 2000);
        sum = (k == 0 ? 0 : sum) + int'(w) * int'(i);
        @(posedge clk); #1;
        checks++;
        if (acc != sum) begin failures++; $display("FAIL n=%0d k=%0d %0d != %0d", n, k, acc, sum); end
        @(negedge clk); en = 0;
        if ($urandom_range(1)) begin
          @(posedge clk); #1;
          checks++;
          if (acc != sum) begin failures++; $display("FAIL hold"); end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
