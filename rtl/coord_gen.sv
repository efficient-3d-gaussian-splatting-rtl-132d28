// Coordinate generator (X-CG and Y-CG) with the tile scheduler.
//
// The scheduler walks the image's tiles in the generalized "pi" trajectory:
//  * the image is cut into 8x8-tile blocks; inside a block the tiles are visited
//    along a Hilbert curve (the pi trajectory), starting at the block's top-left
//    tile and ending at its top-right tile;
//  * the blocks themselves are visited in an S (boustrophedon) order: left to right
//    on even block rows, right to left on odd ones;
//  * tiles outside the whole blocks (a right strip when the width in tiles is not a
//    multiple of 8, a bottom strip when the height is not) follow afterwards in a
//    row-wise S order: even tile rows left to right, odd tile rows right to left.
// The block size, the Hilbert curve and both S orders follow the paper. The
// curve's orientation, the order between the blocks and the left-over strip, and
// keeping the same orientation in every block are this design's choices.
//
// For the current tile the generator drives the sixteen x coordinates
// (16*tile_x + k) to the X-PE line and the sixteen y coordinates (16*tile_y + k)
// to the Y-PE line, as FP16 pixel indices.
//
// Interface: pulse start (with tiles_x, tiles_y >= 1 stable) to load the first tile;
// tile_valid then stays high on the current tile until next is pulsed, which moves
// to the following tile one cycle later. last marks the final tile; next on it
// drops tile_valid.
module coord_gen
  import gs_pkg::*;
#(
  parameter int unsigned TW = 8          // bits of the tile counts (up to 255 tiles)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic [TW-1:0] tiles_x,
  input  logic [TW-1:0] tiles_y,
  input  logic          start,
  input  logic          next,
  output logic          tile_valid,
  output logic [TW-1:0] tile_x,
  output logic [TW-1:0] tile_y,
  output logic          last,
  output fp16_t         x_coord [TILE],
  output fp16_t         y_coord [TILE]
);
  typedef enum logic [1:0] {S_IDLE, S_BLK, S_REM} state_t;

  state_t        st, st_n;
  logic [TW-4:0] bx, by, bx_n, by_n, nbx, nby;
  logic [5:0]    h, h_n;
  logic [TW-1:0] rr, rc, rr_n, rc_n;       // left-over strip position
  logic [TW-1:0] lo_r, hi_r;               // column range of row rr
  logic [2:0]    hx, hy;                   // Hilbert position within the block
  logic          rem_in_blk_rows;          // right strip exists beside the blocks
  logic [TW-1:0] blk_rows;

  assign nbx = tiles_x[TW-1:3];
  assign nby = tiles_y[TW-1:3];
  assign blk_rows = {nby, 3'b000};
  assign rem_in_blk_rows = (tiles_x[2:0] != 3'd0) || (nbx == '0);

  // Hilbert index -> (x, y) on an 8x8 grid (iterative d2xy)
  always_comb begin
    logic [2:0] x, y, t;
    logic [5:0] d;
    logic rx, ry;
    d = h;
    x = '0; y = '0; t = '0;
    for (int s = 1; s < 8; s = s * 2) begin
      rx = d[1];
      ry = d[0] ^ rx;
      if (!ry) begin
        if (rx) begin
          x = 3'(s - 1) - x;
          y = 3'(s - 1) - y;
        end
        t = x; x = y; y = t;
      end
      x = x + (rx ? 3'(s) : 3'd0);
      y = y + (ry ? 3'(s) : 3'd0);
      d = d >> 2;
    end
    hx = x;
    hy = y;
  end

  // column range of a left-over row
  function automatic logic [2*TW-1:0] row_range(input logic [TW-1:0] r);
    if (r < blk_rows) return {nbx, 3'b000, tiles_x - 1'b1};
    else              return {{TW{1'b0}}, tiles_x - 1'b1};
  endfunction

  // first left-over row at or after r; tiles_y when none is left
  function automatic logic [TW-1:0] first_rem_row(input logic [TW-1:0] r);
    if (r < blk_rows && !rem_in_blk_rows) return blk_rows;
    return r;
  endfunction

  assign {lo_r, hi_r} = row_range(rr);

  always_comb begin
    logic [TW-1:0] r1, lo1, hi1;
    st_n = st; bx_n = bx; by_n = by; h_n = h; rr_n = rr; rc_n = rc;
    last = 1'b0;
    r1 = '0; lo1 = '0; hi1 = '0;
    // where the left-over strip starts
    if (st == S_BLK) r1 = first_rem_row('0);
    else             r1 = first_rem_row(rr + 1'b1);
    {lo1, hi1} = row_range(r1);
    case (st)
      S_IDLE: ;
      S_BLK: begin
        if (h != 6'd63) h_n = h + 6'd1;
        else begin
          h_n = '0;
          if (!by[0] && bx != nbx - 1'b1) bx_n = bx + 1'b1;
          else if (by[0] && bx != '0)     bx_n = bx - 1'b1;
          else if (by != nby - 1'b1)      by_n = by + 1'b1;
          else begin
            // blocks done: enter the left-over strip
            if (r1 >= tiles_y) begin
              st_n = S_IDLE; last = 1'b1;
            end else begin
              st_n = S_REM; rr_n = r1; rc_n = r1[0] ? hi1 : lo1;
            end
          end
        end
      end
      S_REM: begin
        if (!rr[0] && rc != hi_r)     rc_n = rc + 1'b1;
        else if (rr[0] && rc != lo_r) rc_n = rc - 1'b1;
        else if (r1 >= tiles_y) begin
          st_n = S_IDLE; last = 1'b1;
        end else begin
          rr_n = r1; rc_n = r1[0] ? hi1 : lo1;
        end
      end
      default: st_n = S_IDLE;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; bx <= '0; by <= '0; h <= '0; rr <= '0; rc <= '0;
    end else if (start) begin
      h <= '0; bx <= '0; by <= '0;
      if (nbx != '0 && nby != '0) st <= S_BLK;
      else begin
        st <= S_REM; rr <= '0; rc <= '0;
      end
    end else if (next && st != S_IDLE) begin
      st <= st_n; bx <= bx_n; by <= by_n; h <= h_n; rr <= rr_n; rc <= rc_n;
    end
  end

  assign tile_valid = (st != S_IDLE);
  assign tile_x = (st == S_BLK) ? {bx, hx} : rc;
  assign tile_y = (st == S_BLK) ? {by, hy} : rr;

  for (genvar k = 0; k < TILE; k++) begin : g_coord
    assign x_coord[k] = uint_to_fp16(16'({tile_x, 4'(k)}));
    assign y_coord[k] = uint_to_fp16(16'({tile_y, 4'(k)}));
  end
endmodule
