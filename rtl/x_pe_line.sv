// X-PE line: sixteen X-PEs, one per pixel column of the 16x16 tile, sharing one
// Gaussian per cycle.
//
// The Gaussian's mu_x, c and -a/2 are broadcast to all X-PEs; the line registers c
// once and -a/2 twice so that each reaches the multiplier stage that uses it. The
// sixteen x coordinates come from the X coordinate generator. A Gaussian applied in
// cycle 0 has its x-terms at the outputs in cycle 2 and its x^2-terms in cycle 3.
// The line is free running: a new Gaussian may enter every cycle.
module x_pe_line
  import gs_pkg::*;
#(
  parameter int unsigned N = TILE
) (
  input  logic  clk,
  input  fp16_t x_coord [N],
  input  fp16_t mu_x,
  input  fp16_t c,
  input  fp16_t na,
  output fp16_t x_term  [N],
  output fp16_t x2_term [N]
);
  fp16_t c_r, na_r, na_rr;

  always_ff @(posedge clk) begin
    c_r   <= c;
    na_r  <= na;
    na_rr <= na_r;
  end

  for (genvar k = 0; k < N; k++) begin : g_pe
    x_pe u_pe (
      .clk, .x(x_coord[k]), .mu_x, .c_s1(c_r), .na_s2(na_rr),
      .x_term(x_term[k]), .x2_term(x2_term[k])
    );
  end
endmodule
