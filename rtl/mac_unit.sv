// mac_unit -- multiply-accumulate unit with its accumulator register.
//
// When en is high, acc becomes w*i (first high: start of a new neuron) or
// acc + w*i. w and i are DATA_W-bit fixed-point words with FRAC fraction
// bits, so acc carries 2*FRAC fraction bits in ACC_W bits. One product per
// cycle, result visible the cycle after en. Sums wrap on overflow (no
// saturation), a choice of this design.
module mac_unit
  import mcma_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  en,
  input  logic  first,
  input  word_t w,
  input  word_t i,
  output acc_t  acc
);
  acc_t prod;
  assign prod = acc_t'(w) * acc_t'(i);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)     acc <= '0;
    else if (en)    acc <= first ? prod : acc + prod;
  end
endmodule
