// X-PE: computes the two X-axis shared terms of axis-shared rasterization for one
// pixel column of the tile.
//
//   x-term   = c * (x - mu_x)
//   x^2-term = (-a/2) * (x - mu_x)^2
//
// One adder (as subtractor) and three multipliers, each followed by a register, as
// in the paper's X-PE drawing. Timing, with the coordinate and mu_x applied in
// cycle 0: (x - mu_x) is registered at the end of cycle 0; c must be applied in
// cycle 1 and x-term is registered at the end of cycle 1; -a/2 must be applied in
// cycle 2 and x^2-term is registered at the end of cycle 2. The X-PE line delays
// the shared parameters once for all sixteen X-PEs.
module x_pe
  import gs_pkg::*;
(
  input  logic  clk,
  input  fp16_t x,        // pixel x coordinate, cycle 0
  input  fp16_t mu_x,     // Gaussian mean, cycle 0
  input  fp16_t c_s1,     // conic cross term c, cycle 1
  input  fp16_t na_s2,    // -a/2, cycle 2
  output fp16_t x_term,   // valid from cycle 2
  output fp16_t x2_term   // valid from cycle 3
);
  fp16_t dx, dx_r, xt, sq, sq_r, x2;

  fp16_add u_sub (.a(x), .b({~mu_x[15], mu_x[14:0]}), .y(dx));
  fp16_mul u_mc  (.a(c_s1), .b(dx_r), .y(xt));
  fp16_mul u_sq  (.a(dx_r), .b(dx_r), .y(sq));
  fp16_mul u_ma  (.a(na_s2), .b(sq_r), .y(x2));

  always_ff @(posedge clk) begin
    dx_r    <= dx;
    x_term  <= xt;
    sq_r    <= sq;
    x2_term <= x2;
  end
endmodule
