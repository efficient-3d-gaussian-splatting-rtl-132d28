// FP16 exponential unit (combinational): y = e^x. This is the "E" unit of each
// reconfigurable PE; rasterization uses it for the Gaussian falloff and MLP mode
// reuses it as the output activation of the decay-factor network.
//
// Method (this design's own; the paper only names the unit): x is converted to a
// signed fixed-point number with 16 fraction bits and multiplied by log2(e) in
// Q1.16, giving t = x*log2(e) with 32 fraction bits. The integer part n of t becomes
// the result exponent and the fraction f selects 2^f from a 33-entry table
// T[k] = round(2^(k/32) * 2^15), k = 0..32, with linear interpolation between
// neighbouring entries. The interpolation error is below 1.2e-4 relative, under
// half an FP16 ulp, so the result is within one ulp of e^x. Results below the
// smallest normal number flush to zero; results above 65504 give infinity.
// Lint lists some bits of interp, p and mant as unused: they are the low product
// bits below the rounding point and the always-one leading bit, dropped on purpose.
module fp16_exp
  import gs_pkg::*;
(
  input  fp16_t x,
  output fp16_t y
);
  // T[k] = round(2^(k/32) * 32768)
  localparam logic [16:0] T [33] = '{
    17'd32768, 17'd33486, 17'd34219, 17'd34968, 17'd35734, 17'd36516, 17'd37316,
    17'd38133, 17'd38968, 17'd39821, 17'd40693, 17'd41584, 17'd42495, 17'd43425,
    17'd44376, 17'd45348, 17'd46341, 17'd47356, 17'd48393, 17'd49452, 17'd50535,
    17'd51642, 17'd52773, 17'd53928, 17'd55109, 17'd56316, 17'd57549, 17'd58809,
    17'd60097, 17'd61413, 17'd62757, 17'd64132, 17'd65536};
  localparam logic [16:0] LOG2E_Q16 = 17'd94548;   // round(log2(e) * 2^16)

  logic [4:0]  ex;
  logic [10:0] m;
  logic [21:0] mag;          // |x| with 16 fraction bits, |x| < 64
  logic signed [22:0] xf;
  logic signed [47:0] t;
  logic signed [15:0] n;
  logic [4:0]  idx;
  logic [15:0] fr;
  logic [16:0] t0, t1;
  logic [33:0] interp;
  logic [16:0] p;            // 2^f in Q1.15, [32768, 65536]
  logic [11:0] mant;
  logic signed [15:0] e;

  always_comb begin
    ex = x[14:10];
    m  = {1'b1, x[9:0]};
    // value = m * 2^(ex-25); with 16 fraction bits: m << (ex-9)
    if (ex >= 5'd9) mag = 22'(m) << (ex - 5'd9);
    else            mag = 22'(m) >> (5'd9 - ex);
    xf = x[15] ? -$signed({1'b0, mag}) : $signed({1'b0, mag});
    t  = 48'(xf) * $signed({31'd0, LOG2E_Q16});
    n  = 16'(t >>> 32);
    idx = t[31:27];
    fr  = t[26:11];
    t0  = T[{1'b0, idx}];
    t1  = T[idx + 6'd1];
    interp = 34'(t0) * 34'd65536 + 34'(t1 - t0) * 34'(fr);
    p    = interp[32:16];
    // Q1.15 to an 11-bit significand, round half up
    mant = 12'(p[16:5]) + 12'(p[4]);
    e    = n + 16'sd15;
    if (mant[11] || p[16]) begin
      mant = 12'h400;
      e    = e + 16'sd1;
    end
    if (ex == 5'd31)
      y = x[15] ? ((x[9:0] == 0) ? FP16_ZERO : FP16_NAN) : x;
    else if (ex == 5'd0)
      y = FP16_ONE;                        // e^0 (subnormal inputs read as zero)
    else if (ex >= 5'd21) begin            // |x| >= 64: saturate
      y = x[15] ? FP16_ZERO : FP16_INF;
    end else if (e <= 16'sd0)
      y = FP16_ZERO;
    else if (e >= 16'sd31)
      y = FP16_INF;
    else
      y = {1'b0, e[4:0], mant[9:0]};
  end
endmodule
