// Leaky ReLU with slope 1/8 for FP16 (combinational), the first-layer activation of
// the decay-factor MLP.
//
// Follows the paper: a sign test and a 5-bit integer subtractor that takes 3 off the
// exponent field of a negative normal number (multiplying it by 1/8). Positive
// numbers, zeros and subnormals pass unchanged. Where the exponent field is 3 or
// less the subtraction would leave the normal range; this design then returns a
// signed zero (the paper does not cover that case).
module leaky_relu
  import gs_pkg::*;
(
  input  fp16_t x,
  output fp16_t y
);
  logic [4:0] e;
  always_comb begin
    e = x[14:10];
    if (!x[15] || e == 5'd0 || e == 5'd31) y = x;
    else if (e <= 5'd3)                    y = {1'b1, 15'd0};
    else                                   y = {x[15], e - 5'd3, x[9:0]};
  end
endmodule
