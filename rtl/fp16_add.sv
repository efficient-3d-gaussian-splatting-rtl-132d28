// FP16 adder (combinational), one of the six A-* adders of each reconfigurable PE
// and of the X-/Y-PE subtractors.
//
// Computes y = a + b in IEEE-754 binary16 with round-to-nearest-even. The operands
// are aligned with three extra bits (guard, round, sticky), added or subtracted,
// renormalised with a leading-zero count and rounded. Subnormal inputs are read as
// zero and subnormal results are flushed to zero; infinities propagate and
// inf - inf gives a quiet NaN. The paper uses a vendor FP16 library cell here; this
// is a stand-in of the same function. No clock: the caller registers the result.
module fp16_add
  import gs_pkg::*;
(
  input  fp16_t a,
  input  fp16_t b,
  output fp16_t y
);
  logic        sa, sb, sl, ss;
  logic [4:0]  ea, eb, el, es;
  logic [10:0] ml, ms;
  logic [4:0]  d;
  logic [13:0] ml_x, ms_x, ms_sh;
  logic        sticky;
  logic [14:0] sum;
  logic [13:0] nrm;
  logic [5:0]  e_n;
  logic [3:0]  lz;
  logic        rnd;
  logic [11:0] mant;
  logic [5:0]  e_f;

  always_comb begin
    sa = a[15]; sb = b[15];
    ea = a[14:10]; eb = b[14:10];
    // larger magnitude first
    if ({ea, a[9:0]} >= {eb, b[9:0]}) begin
      sl = sa; el = ea; ml = (ea == 0) ? 11'd0 : {1'b1, a[9:0]};
      ss = sb; es = eb; ms = (eb == 0) ? 11'd0 : {1'b1, b[9:0]};
    end else begin
      sl = sb; el = eb; ml = (eb == 0) ? 11'd0 : {1'b1, b[9:0]};
      ss = sa; es = ea; ms = (ea == 0) ? 11'd0 : {1'b1, a[9:0]};
    end
    d      = (es == 0) ? 5'd0 : el - es;
    ml_x   = {ml, 3'b000};
    ms_x   = {ms, 3'b000};
    if (d >= 5'd14) begin
      ms_sh  = 14'd0;
      sticky = |ms;
    end else begin
      ms_sh  = ms_x >> d;
      sticky = ((ms_sh << d) != ms_x);
    end
    ms_sh[0] = ms_sh[0] | sticky;

    if (sl == ss) sum = {1'b0, ml_x} + {1'b0, ms_sh};
    else          sum = {1'b0, ml_x} - {1'b0, ms_sh};

    e_n = {1'b0, el};
    lz  = 4'd0;
    if (sum[14]) begin
      nrm = sum[14:1];
      nrm[0] = nrm[0] | sum[0];
      e_n = e_n + 6'd1;
    end else begin
      for (int i = 0; i < 14; i++) if (sum[i]) lz = 4'(13 - i);
      nrm = sum[13:0] << lz;
      e_n = e_n - {2'b00, lz};
    end

    rnd  = nrm[2] & (nrm[1] | nrm[0] | nrm[3]);
    mant = {1'b0, nrm[13:3]} + {11'd0, rnd};
    e_f  = e_n;
    if (mant[11]) begin
      mant = mant >> 1;
      e_f  = e_f + 6'd1;
    end

    if (ea == 5'd31 || eb == 5'd31) begin
      if (ea == 5'd31 && eb == 5'd31 && (sa != sb || a[9:0] != 0 || b[9:0] != 0)) y = FP16_NAN;
      else if (ea == 5'd31) y = a;
      else y = b;
    end else if (sum == 15'd0 || e_n[5] || e_n == 6'd0 || e_f == 6'd0) begin
      y = FP16_ZERO;                       // exact zero or underflow (flush to zero)
    end else if (e_f >= 6'd31) begin
      y = {sl, FP16_INF[14:0]};
    end else begin
      y = {sl, e_f[4:0], mant[9:0]};
    end
  end
endmodule
