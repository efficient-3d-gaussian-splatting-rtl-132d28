// Y-PE: computes the two Y-axis shared terms of axis-shared rasterization for one
// pixel row of the tile.
//
//   y-term   = (y - mu_y)
//   y^2-term = (-b/2) * (y - mu_y)^2
//
// One adder (as subtractor) and two multipliers, each followed by a register, as in
// the paper's Y-PE drawing. Timing, with y and mu_y applied in cycle 0: y-term is
// registered at the end of cycle 0; -b/2 must be applied in cycle 2 and y^2-term is
// registered at the end of cycle 2.
module y_pe
  import gs_pkg::*;
(
  input  logic  clk,
  input  fp16_t y,        // pixel y coordinate, cycle 0
  input  fp16_t mu_y,     // Gaussian mean, cycle 0
  input  fp16_t nb_s2,    // -b/2, cycle 2
  output fp16_t y_term,   // valid from cycle 1
  output fp16_t y2_term   // valid from cycle 3
);
  fp16_t dy, sq, sq_r, y2;

  fp16_add u_sub (.a(y), .b({~mu_y[15], mu_y[14:0]}), .y(dy));
  fp16_mul u_sq  (.a(y_term), .b(y_term), .y(sq));
  fp16_mul u_mb  (.a(nb_s2), .b(sq_r), .y(y2));

  always_ff @(posedge clk) begin
    y_term  <= dy;
    sq_r    <= sq;
    y2_term <= y2;
  end
endmodule
