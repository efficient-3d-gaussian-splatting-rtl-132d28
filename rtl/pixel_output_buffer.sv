// Pixel output buffer (4 KB): holds, for every pixel of a tile, the denominator
// sum(F*alpha) and the three numerators sum(F*alpha*colour) of the order-independent
// blending equation, until the division array has normalised them.
//
// Two banks of 256 pixels x 4 FP16 values (2 x 2 KB = the paper's 4 KB): while the
// division array drains one tile's bank, the array accumulates the next tile into
// the other (this design's use of the 4 KB). The array writes a whole tile (all 256
// pixels, 1024 values) in one cycle (wr_*), can read it back in full for the
// save/restore around MLP phases (ld_*, combinational), and the division array reads
// four pixels per cycle (rd_*, combinational).
module pixel_output_buffer
  import gs_pkg::*;
#(
  parameter int unsigned N  = NPIX,
  parameter int unsigned NR = 4
) (
  input  logic     clk,
  input  logic     wr_en,
  input  logic     wr_bank,
  input  pix_acc_t wr_data [N],
  input  logic     ld_bank,
  output pix_acc_t ld_data [N],
  input  logic     rd_bank,
  input  logic [$clog2(N)-1:0] rd_pix [NR],
  output pix_acc_t rd_data [NR]
);
  pix_acc_t mem [2][N];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_bank] <= wr_data;
  end

  assign ld_data = mem[ld_bank];
  for (genvar i = 0; i < NR; i++) begin : g_rd
    assign rd_data[i] = mem[rd_bank][rd_pix[i]];
  end
endmodule
