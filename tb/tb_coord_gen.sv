// Self-checking test of coord_gen. For several image sizes (whole blocks only,
// blocks plus right and bottom strips, strips only) the testbench builds the
// expected tile order itself: blocks in S order, inside each block the tile whose
// Hilbert index (computed with the inverse mapping xy2d) equals the step number,
// then the left-over tiles in row-wise S order. Every step's tile, the last flag and
// all 32 FP16 pixel coordinates are compared; the 4x4 top-left corner of a block is
// also checked to be a Hilbert curve (each step moves to a neighbouring tile).
// The sizes include the tile grids of the evaluated image resolutions; above 2048
// pixels the FP16 coordinates are rounded to even values, as the reference does.
module tb_coord_gen;
  import gs_pkg::*;
  import fp16_ref_pkg::*;
  localparam int TW = 8;
  logic clk = 0, rst_n = 0, start = 0, next = 0;
  logic [TW-1:0] tiles_x, tiles_y, tile_x, tile_y;
  logic tile_valid, last;
  fp16_t x_coord [TILE], y_coord [TILE];
  int checks = 0, failures = 0;
  int ex [$], ey [$];

  coord_gen #(.TW(TW)) dut (.*);
  always #5 clk = ~clk;

  function automatic int xy2d(input int n, input int x0, input int y0);
    int x, y, d, rx, ry, t;
    x = x0; y = y0; d = 0;
    for (int s = n / 2; s > 0; s = s / 2) begin
      rx = ((x & s) > 0) ? 1 : 0;
      ry = ((y & s) > 0) ? 1 : 0;
      d += s * s * ((3 * rx) ^ ry);
      if (ry == 0) begin
        if (rx == 1) begin x = n - 1 - x; y = n - 1 - y; end
        t = x; x = y; y = t;
      end
    end
    return d;
  endfunction

  task automatic build(input int tx, input int ty);
    int nbx, nby;
    nbx = tx / 8; nby = ty / 8;
    ex.delete(); ey.delete();
    if (nbx > 0 && nby > 0)
      for (int by = 0; by < nby; by++)
        for (int i = 0; i < nbx; i++) begin
          int bx;
          bx = (by % 2 == 0) ? i : nbx - 1 - i;
          for (int d = 0; d < 64; d++)
            for (int x = 0; x < 8; x++) for (int y = 0; y < 8; y++)
              if (xy2d(8, x, y) == d) begin ex.push_back(bx * 8 + x); ey.push_back(by * 8 + y); end
        end
    for (int r = 0; r < ty; r++) begin
      int lo;
      lo = (nbx > 0 && nby > 0 && r < nby * 8) ? nbx * 8 : 0;
      if (r % 2 == 0) begin for (int c = lo; c < tx; c++) begin ex.push_back(c); ey.push_back(r); end end
      else            begin for (int c = tx - 1; c >= lo; c--) begin ex.push_back(c); ey.push_back(r); end end
    end
  endtask

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 12) $display("FAIL %s", what); end
  endtask

  task automatic run(input int tx, input int ty);
    build(tx, ty);
    tiles_x = TW'(tx); tiles_y = TW'(ty);
    start = 1; @(posedge clk); #1 start = 0;
    for (int i = 0; i < ex.size(); i++) begin
      chk(tile_valid, $sformatf("%0dx%0d step %0d valid", tx, ty, i));
      chk(int'(tile_x) == ex[i] && int'(tile_y) == ey[i],
          $sformatf("%0dx%0d step %0d tile (%0d,%0d) expected (%0d,%0d)", tx, ty, i, tile_x, tile_y, ex[i], ey[i]));
      chk(last == (i == ex.size() - 1), $sformatf("%0dx%0d step %0d last", tx, ty, i));
      if (i % 5 == 0)
        for (int k = 0; k < TILE; k++)
          chk(x_coord[k] == to_fp16(real'(ex[i] * 16 + k)) && y_coord[k] == to_fp16(real'(ey[i] * 16 + k)),
              $sformatf("coords step %0d k %0d", i, k));
      next = 1; @(posedge clk); #1 next = 0;
    end
    chk(!tile_valid, $sformatf("%0dx%0d done", tx, ty));
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    tiles_x = 8; tiles_y = 8;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    // Hilbert continuity inside a block and the pi shape of the 4x4 corner
    build(8, 8);
    for (int i = 1; i < 64; i++) begin
      int dd;
      dd = (ex[i] > ex[i-1] ? ex[i] - ex[i-1] : ex[i-1] - ex[i]) + (ey[i] > ey[i-1] ? ey[i] - ey[i-1] : ey[i-1] - ey[i]);
      chk(dd == 1, $sformatf("reference step %0d not adjacent", i));
    end
    chk(ex[63] == 7 && ey[63] == 0, "block ends at its top-right tile");
    run(8, 8);
    run(16, 16);
    run(19, 13);
    run(24, 9);
    run(5, 3);
    run(3, 20);
    run(1, 1);
    // workload image sizes: 2704x2028 (Neu3D, 169x127 tiles) and 1558x1038
    // (a typical half-resolution indoor MipNeRF-360 image, 98x65 tiles)
    run(169, 127);
    run(98, 65);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
