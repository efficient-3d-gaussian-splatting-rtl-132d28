// Division array: four FP16 dividers that turn one tile's accumulated numerators
// and denominators into final colours, C = sum(F*alpha*c) / sum(F*alpha).
//
// A tile has 256 pixels x 3 channels = 768 divisions. They are taken in the order
// e = 3*pixel + channel (channel 0 = R, 1 = G, 2 = B), four per cycle, so a tile
// takes 192 cycles. Each cycle the array reads the pixels of divisions e..e+3 from
// the pixel output buffer, divides, and registers the four results, which leave on
// out_valid with out_base = e and the tile's coordinates. A pixel that no Gaussian
// reached has a zero denominator and is output as 0 (this design's choice).
// Interface: start with bank and tile coordinates while !busy; busy stays high
// until the last group has been output. The four-divider count is the paper's; the
// order of the work is this design's.
module div_array
  import gs_pkg::*;
#(
  parameter int unsigned N    = NPIX,
  parameter int unsigned NDIV = 4,
  parameter int unsigned TW   = 8
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic          start_bank,
  input  logic [TW-1:0] start_tx,
  input  logic [TW-1:0] start_ty,
  output logic          busy,
  output logic          busy_bank,
  output logic          rd_bank,
  output logic [$clog2(N)-1:0] rd_pix [NDIV],
  input  pix_acc_t      rd_data [NDIV],
  output logic          out_valid,
  output logic [TW-1:0] out_tx,
  output logic [TW-1:0] out_ty,
  output logic [$clog2(3*N)-1:0] out_base,
  output fp16_t         out_val [NDIV]
);
  localparam int unsigned EW = $clog2(3*N);

  logic [EW-1:0] e;
  logic [TW-1:0] tx, ty;
  fp16_t num [NDIV], q [NDIV];

  assign rd_bank = busy_bank;

  for (genvar i = 0; i < NDIV; i++) begin : g_div
    logic [EW-1:0] ei;
    logic [1:0]    ch;
    assign ei        = e + EW'(i);
    assign rd_pix[i] = $clog2(N)'(ei / 3);
    assign ch        = 2'(ei % 3);
    assign num[i]    = (ch == 2'd0) ? rd_data[i].r : (ch == 2'd1) ? rd_data[i].g : rd_data[i].b;
    fp16_div u_div (.a(num[i]), .b(rd_data[i].den), .y(q[i]));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; busy_bank <= 1'b0; e <= '0; tx <= '0; ty <= '0;
      out_valid <= 1'b0; out_tx <= '0; out_ty <= '0; out_base <= '0;
    end else begin
      out_valid <= busy;
      if (busy) begin
        out_tx   <= tx;
        out_ty   <= ty;
        out_base <= e;
        if (e == EW'(3*N - NDIV)) busy <= 1'b0;
        else                      e <= e + EW'(NDIV);
      end else if (start) begin
        busy <= 1'b1; busy_bank <= start_bank; e <= '0; tx <= start_tx; ty <= start_ty;
      end
    end
  end

  always_ff @(posedge clk) begin
    for (int i = 0; i < NDIV; i++)
      out_val[i] <= (rd_data[i].den[14:0] == 15'd0) ? FP16_ZERO : q[i];
  end
endmodule
