// FP16 divider (combinational), one lane of the division array that turns the
// accumulated numerator and denominator of each pixel into its colour.
//
// Computes y = a / b in IEEE-754 binary16 with round-to-nearest-even. The dividend
// significand is shifted left by 14 places and divided by the divisor significand,
// which leaves 14 or 15 quotient bits; the remainder supplies the sticky bit.
// Subnormal inputs count as zero and subnormal results are flushed to zero; x/0
// gives infinity, 0/0 gives NaN. The division algorithm is this design's choice;
// the paper only states that the array has four dividers.
module fp16_div
  import gs_pkg::*;
(
  input  fp16_t a,
  input  fp16_t b,
  output fp16_t y
);
  logic        s;
  logic [4:0]  ea, eb;
  logic [24:0] num;
  logic [14:0] q;
  logic [10:0] rem;
  logic [10:0] m;
  logic        g, st, rnd;
  logic [11:0] mant;
  logic signed [7:0] e;

  always_comb begin
    s   = a[15] ^ b[15];
    ea  = a[14:10];
    eb  = b[14:10];
    num = {1'b1, a[9:0], 14'd0};
    q   = 15'(num / {14'd0, 1'b1, b[9:0]});
    rem = 11'(num % {14'd0, 1'b1, b[9:0]});
    e   = 8'(signed'({3'b000, ea})) - 8'(signed'({3'b000, eb})) + 8'sd15;
    if (q[14]) begin
      m = q[14:4]; g = q[3]; st = (|q[2:0]) | (rem != 0);
    end else begin
      m = q[13:3]; g = q[2]; st = (|q[1:0]) | (rem != 0);
      e = e - 8'sd1;
    end
    rnd  = g & (st | m[0]);
    mant = {1'b0, m} + {11'd0, rnd};
    if (mant[11]) begin
      mant = mant >> 1;
      e    = e + 8'sd1;
    end
    if ((ea == 5'd31 && a[9:0] != 0) || (eb == 5'd31 && b[9:0] != 0) ||
        (ea == 5'd0 && eb == 5'd0) || (ea == 5'd31 && eb == 5'd31))
      y = FP16_NAN;
    else if (ea == 5'd31 || eb == 5'd0)
      y = {s, FP16_INF[14:0]};
    else if (ea == 5'd0 || eb == 5'd31 || e <= 8'sd0)
      y = {s, 15'd0};
    else if (e >= 8'sd31)
      y = {s, FP16_INF[14:0]};
    else
      y = {s, e[4:0], mant[9:0]};
  end
endmodule
