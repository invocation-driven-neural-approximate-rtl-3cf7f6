// sigmoid_unit -- activation unit of a PE.
//
// Takes the 32-bit accumulator value (2*FRAC fraction bits) and returns
// sigmoid(x) as a 16-bit word with FRAC fraction bits, combinationally.
// The paper names a sigmoid activation but not how it is built; this design
// uses the PLAN piecewise-linear approximation, which needs only shifts and
// adds:
//   |x| >= 5          : y = 1
//   2.375 <= |x| < 5  : y = |x|/32 + 0.84375
//   1 <= |x| < 2.375  : y = |x|/8  + 0.625
//   0 <= |x| < 1      : y = |x|/4  + 0.5
//   x < 0             : y = 1 - y(|x|)
// The result is truncated to FRAC fraction bits.
module sigmoid_unit
  import mcma_pkg::*;
(
  input  acc_t  x,
  output word_t y
);
  localparam int unsigned F2 = 2 * FRAC;
  localparam logic [ACC_W-1:0] C_ONE  = ACC_W'(1) << F2;
  localparam logic [ACC_W-1:0] C_5    = ACC_W'(5) << F2;
  localparam logic [ACC_W-1:0] C_2375 = (ACC_W'(19) << F2) >> 3;   // 2.375
  localparam logic [ACC_W-1:0] C_84   = (ACC_W'(27) << F2) >> 5;   // 0.84375
  localparam logic [ACC_W-1:0] C_625  = (ACC_W'(5) << F2) >> 3;    // 0.625
  localparam logic [ACC_W-1:0] C_HALF = C_ONE >> 1;

  logic              neg;
  logic [ACC_W-1:0]  ax, yp, yq;

  always_comb begin
    neg = x[ACC_W-1];
    ax  = neg ? ACC_W'(-x) : ACC_W'(x);
    if (x == acc_t'({1'b1, {(ACC_W-1){1'b0}}})) ax = {1'b0, {(ACC_W-1){1'b1}}};  // |most negative|
    if (ax >= C_5)         yp = C_ONE;
    else if (ax >= C_2375) yp = (ax >> 5) + C_84;
    else if (ax >= C_ONE)  yp = (ax >> 3) + C_625;
    else                   yp = (ax >> 2) + C_HALF;
    yq = neg ? (C_ONE - yp) : yp;
    y  = word_t'(yq >> FRAC);
  end
endmodule
