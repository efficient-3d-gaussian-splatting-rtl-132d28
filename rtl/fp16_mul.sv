// FP16 multiplier (combinational), one of the six M-* multipliers of each
// reconfigurable PE and of the X-/Y-PE lines.
//
// Computes y = a * b in IEEE-754 binary16 with round-to-nearest-even: the 11-bit
// significands are multiplied into a 22-bit product, normalised by at most one place
// and rounded with guard and sticky bits. Subnormal inputs count as zero, subnormal
// results are flushed to zero, overflow gives infinity, 0 * inf gives NaN. The paper
// uses a vendor FP16 cell; this is a stand-in of the same function.
module fp16_mul
  import gs_pkg::*;
(
  input  fp16_t a,
  input  fp16_t b,
  output fp16_t y
);
  logic        s;
  logic [4:0]  ea, eb;
  logic [21:0] p;
  logic [10:0] m;
  logic        g, st, rnd;
  logic [11:0] mant;
  logic signed [7:0] e;

  always_comb begin
    s  = a[15] ^ b[15];
    ea = a[14:10];
    eb = b[14:10];
    p  = {1'b1, a[9:0]} * {1'b1, b[9:0]};
    e  = 8'(signed'({3'b000, ea})) + 8'(signed'({3'b000, eb})) - 8'sd15;
    if (p[21]) begin
      m  = p[21:11]; g = p[10]; st = |p[9:0];
      e  = e + 8'sd1;
    end else begin
      m  = p[20:10]; g = p[9];  st = |p[8:0];
    end
    rnd  = g & (st | m[0]);
    mant = {1'b0, m} + {11'd0, rnd};
    if (mant[11]) begin
      mant = mant >> 1;
      e    = e + 8'sd1;
    end
    if ((ea == 5'd31 && b[14:0] == 0) || (eb == 5'd31 && a[14:0] == 0) ||
        (ea == 5'd31 && a[9:0] != 0) || (eb == 5'd31 && b[9:0] != 0))
      y = FP16_NAN;
    else if (ea == 5'd31 || eb == 5'd31)
      y = {s, FP16_INF[14:0]};
    else if (ea == 5'd0 || eb == 5'd0 || e <= 8'sd0)
      y = {s, 15'd0};
    else if (e >= 8'sd31)
      y = {s, FP16_INF[14:0]};
    else
      y = {s, e[4:0], mant[9:0]};
  end
endmodule
