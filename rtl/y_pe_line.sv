// Y-PE line: sixteen Y-PEs, one per pixel row of the 16x16 tile, sharing one
// Gaussian per cycle.
//
// mu_y and -b/2 are broadcast to all Y-PEs; the line registers -b/2 twice so that
// it reaches the multiplier stage. A Gaussian applied in cycle 0 has its y-terms
// at the outputs in cycle 1 and its y^2-terms in cycle 3. In the accelerator the
// Y-PE line starts each Gaussian one cycle after the X-PE line, so that x-term and
// y-term reach the rasterization PEs in the same cycle, the x^2-term one cycle
// later and the y^2-term one cycle after that.
module y_pe_line
  import gs_pkg::*;
#(
  parameter int unsigned N = TILE
) (
  input  logic  clk,
  input  fp16_t y_coord [N],
  input  fp16_t mu_y,
  input  fp16_t nb,
  output fp16_t y_term  [N],
  output fp16_t y2_term [N]
);
  fp16_t nb_r, nb_rr;

  always_ff @(posedge clk) begin
    nb_r  <= nb;
    nb_rr <= nb_r;
  end

  for (genvar k = 0; k < N; k++) begin : g_pe
    y_pe u_pe (
      .clk, .y(y_coord[k]), .mu_y, .nb_s2(nb_rr),
      .y_term(y_term[k]), .y2_term(y2_term[k])
    );
  end
endmodule
