// tb_sigmoid_unit -- self-checking test of sigmoid_unit.
// Sweeps the segment boundaries and random inputs and compares with the
// integer reference of the piecewise-linear sigmoid; also checks symmetry
// y(-x) + y(x) ~ 1.0 and monotonicity.
module tb_sigmoid_unit;
  import mcma_pkg::*;
  import tb_ref_pkg::*;
  acc_t  x;
  word_t y;
  int checks = 0, failures = 0;
  int prev;

  sigmoid_unit dut (.x, .y);

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s x=%0d y=%0d", what, x, y); end
  endtask

  initial begin
    int pts[] = '{0, 1, -1, 65535, 65536, -65536, 155647, 155648, -155648,
                  327679, 327680, -327680, 1000000, -1000000, 2147483647, -2147483648};
    foreach (pts[i]) begin
      x = pts[i]; #1;
      chk(int'(y) == sig_ref(pts[i]), "boundary");
    end
    x = 0; #1; chk(y == 16'sd128, "sigmoid(0)=0.5");
    x = 32'sd400000; #1; chk(y == 16'sd256, "saturates at 1.0");
    for (int i = 0; i < 3000; i++) begin
      automatic int v = int'($urandom_range(800000)) - 400000;
      x = v; #1;
      chk(int'(y) == sig_ref(v), "random");
    end
    prev = -1;
    for (int v = -400000; v <= 400000; v += 997) begin
      x = v; #1;
      chk(int'(y) >= prev, "monotonic");
      prev = int'(y);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
