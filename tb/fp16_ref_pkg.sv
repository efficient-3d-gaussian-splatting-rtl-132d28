// Reference FP16 conversions for the testbenches, written with real arithmetic and
// independent of the RTL datapath. to_fp16 rounds to nearest even and flushes
// results below the smallest normal number to zero, as the datapath does.
package fp16_ref_pkg;

  function automatic real to_real(input logic [15:0] h);
    int e;
    real m, v;
    e = int'(h[14:10]);
    if (e == 0) return 0.0;                  // subnormals read as zero
    m = 1.0 + real'(h[9:0]) / 1024.0;
    v = m * (2.0 ** (e - 15));
    return h[15] ? -v : v;
  endfunction

  function automatic logic [15:0] to_fp16(input real r);
    logic s;
    real a, m, fl, fr;
    int e;
    s = (r < 0.0);
    a = s ? -r : r;
    if (a == 0.0) return 16'h0000;
    e = 0;
    while (a >= 2.0) begin a = a / 2.0; e++; end
    while (a < 1.0)  begin a = a * 2.0; e--; end
    if (e < -14) return {s, 15'd0};
    m  = a * 1024.0;
    fl = $floor(m);
    fr = m - fl;
    if (fr > 0.5 || (fr == 0.5 && (int'(fl) % 2 == 1))) fl = fl + 1.0;
    if (fl >= 2048.0) begin fl = fl / 2.0; e++; end
    if (e > 15) return {s, 15'h7C00};
    return {s, 5'(e + 15), 10'(int'(fl) - 1024)};
  endfunction

  // Equality that treats +0 and -0 as the same value.
  function automatic bit fp_eq(input logic [15:0] a, input logic [15:0] b);
    return (a == b) || (a[14:0] == 15'd0 && b[14:0] == 15'd0);
  endfunction

  // Distance in units in the last place between two finite FP16 values of any sign.
  function automatic int ulp_dist(input logic [15:0] a, input logic [15:0] b);
    int ia, ib;
    ia = a[15] ? -int'(a[14:0]) : int'(a[14:0]);
    ib = b[15] ? -int'(b[14:0]) : int'(b[14:0]);
    return (ia > ib) ? ia - ib : ib - ia;
  endfunction

  // Random normal FP16 value with exponent field in [emin, emax].
  function automatic logic [15:0] rand_fp16(input int emin, input int emax);
    logic [15:0] v;
    v[15]    = 1'($urandom);
    v[14:10] = 5'(emin + int'($urandom % unsigned'(emax - emin + 1)));
    v[9:0]   = 10'($urandom);
    return v;
  endfunction

endpackage
