// Self-checking test of one reconfigurable PE.
//
// Rasterization: a stream of random Gaussians (with bubbles) is applied with the
// timing the array provides: x-/y-term in cycle 0, x^2-term in cycle 1, y^2-term in
// cycle 2, opacity in cycle 4, F(d) in cycle 5 and colour in cycle 6. The four
// accumulators are compared with sum(F*alpha) and sum(F*alpha*colour) computed in
// real arithmetic. Clearing and loading the accumulators are checked too.
// MLP mode: one depth per cycle; F(d) must appear exactly MLP_LAT = 6 cycles later
// and match exp(w4*h1 + w5*h2 + w6*h3 + b4) with h_k = LeakyReLU(w_k*d + b_k).
module tb_rpe;
  import gs_pkg::*;
  import fp16_ref_pkg::*;
  localparam int NG = 300;
  localparam int NT = NG + 12;
  logic clk = 0, rst_n = 0;
  pe_mode_t mode = MODE_RASTER;
  logic v_in = 0, acc_clr = 0, acc_ld = 0;
  fp16_t x_term, y_term, x2_term, y2_term, d_in, f_out;
  breg_t breg;
  pix_acc_t acc_ld_val, acc;
  int checks = 0, failures = 0;

  // per-cycle stimulus of the rasterization run
  logic  sv [NT];
  fp16_t sxt [NT], syt [NT], sx2 [NT], sy2 [NT], so [NT], sf [NT], sr [NT], sg [NT], sb [NT];

  rpe dut (.*);
  always #5 clk = ~clk;

  function automatic fp16_t rnd_range(input real lo, input real hi);
    return to_fp16(lo + (hi - lo) * real'($urandom % 10000) / 10000.0);
  endfunction

  function automatic bit close(input fp16_t got, input real ref_v, input real tol);
    real gv = to_real(got);
    real err = (gv > ref_v) ? gv - ref_v : ref_v - gv;
    real mag = (ref_v < 0.0) ? -ref_v : ref_v;
    return err <= tol * mag + 1e-3;
  endfunction

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 12) $display("FAIL %s", what);
    end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real den, nr, ng, nb, alpha;
    mlp_w_t w;
    real d_hist [64];
    int mlp_cnt;
    breg = '0; d_in = '0; acc_ld_val = '0;
    x_term = '0; y_term = '0; x2_term = '0; y2_term = '0;
    for (int t = 0; t < NT; t++) begin
      sv[t]  = (t < NG) && ($urandom % 5 != 0);
      sxt[t] = rnd_range(-1.0, 1.0);  syt[t] = rnd_range(-1.0, 1.0);
      sx2[t] = rnd_range(-2.0, 0.0);  sy2[t] = rnd_range(-2.0, 0.0);
      so[t]  = rnd_range(0.05, 1.0);  sf[t]  = rnd_range(0.1, 2.0);
      sr[t]  = rnd_range(0.0, 1.0);   sg[t]  = rnd_range(0.0, 1.0);  sb[t] = rnd_range(0.0, 1.0);
    end
    repeat (2) @(posedge clk);
    #1 rst_n = 1; acc_clr = 1;
    @(posedge clk); #1 acc_clr = 0;
    check(acc == '0, "accumulators cleared");

    // ---------------- rasterization run ----------------
    for (int t = 0; t < NT; t++) begin
      v_in    = sv[t];
      x_term  = sxt[t]; y_term = syt[t];
      x2_term = (t >= 1) ? sx2[t-1] : '0;
      y2_term = (t >= 2) ? sy2[t-2] : '0;
      breg.u_w5_o = (t >= 4) ? so[t-4] : '0;
      breg.u_w6_f = (t >= 5) ? sf[t-5] : '0;
      breg.u_w1_r = (t >= 6) ? sr[t-6] : '0;
      breg.u_w2_g = (t >= 6) ? sg[t-6] : '0;
      breg.u_w3_b = (t >= 6) ? sb[t-6] : '0;
      @(posedge clk); #1;
    end
    v_in = 0;
    den = 0; nr = 0; ng = 0; nb = 0;
    for (int t = 0; t < NG; t++) if (sv[t]) begin
      alpha = to_real(so[t]) * $exp(to_real(sxt[t]) * to_real(syt[t]) + to_real(sx2[t]) + to_real(sy2[t]));
      den += to_real(sf[t]) * alpha;
      nr  += to_real(sf[t]) * alpha * to_real(sr[t]);
      ng  += to_real(sf[t]) * alpha * to_real(sg[t]);
      nb  += to_real(sf[t]) * alpha * to_real(sb[t]);
    end
    check(close(acc.den, den, 0.02), $sformatf("den %f vs %f", to_real(acc.den), den));
    check(close(acc.r, nr, 0.02), $sformatf("R %f vs %f", to_real(acc.r), nr));
    check(close(acc.g, ng, 0.02), $sformatf("G %f vs %f", to_real(acc.g), ng));
    check(close(acc.b, nb, 0.02), $sformatf("B %f vs %f", to_real(acc.b), nb));

    // single Gaussian after a load: exact pipeline timing of the accumulation
    acc_ld_val = '{den: to_fp16(1.0), r: to_fp16(2.0), g: to_fp16(3.0), b: to_fp16(4.0)};
    acc_ld = 1; @(posedge clk); #1 acc_ld = 0;
    check(acc == acc_ld_val, "accumulators loaded");
    v_in = 1; x_term = to_fp16(0.5); y_term = to_fp16(-1.0);
    @(posedge clk); #1 v_in = 0; x2_term = to_fp16(-0.25);
    @(posedge clk); #1 y2_term = to_fp16(-0.25);
    @(posedge clk); #1;
    @(posedge clk); #1 breg.u_w5_o = to_fp16(0.5);
    @(posedge clk); #1 breg.u_w6_f = to_fp16(2.0);
    @(posedge clk); #1 breg.u_w1_r = to_fp16(1.0); breg.u_w2_g = to_fp16(0.5); breg.u_w3_b = to_fp16(0.25);
    @(posedge clk); #1;
    alpha = 0.5 * $exp(-1.0);
    check(close(acc.den, 1.0 + 2.0 * alpha, 0.002), "den after 7 cycles");
    check(close(acc.r, 2.0, 0.0), "R not yet accumulated after 7 cycles");
    @(posedge clk); #1;
    check(close(acc.r, 2.0 + 2.0 * alpha, 0.002), "R after 8 cycles");
    check(close(acc.g, 3.0 + alpha, 0.002), "G after 8 cycles");
    check(close(acc.b, 4.0 + 0.5 * alpha, 0.002), "B after 8 cycles");

    // ---------------- MLP mode ----------------
    w.w1 = to_fp16(-0.8);  w.w2 = to_fp16(0.6);  w.w3 = to_fp16(-0.3);
    w.w4 = to_fp16(0.9);   w.w5 = to_fp16(-0.7); w.w6 = to_fp16(0.5);
    w.b1 = to_fp16(0.4);   w.b2 = to_fp16(-0.2); w.b3 = to_fp16(0.1); w.b4 = to_fp16(-0.3);
    breg = '{u_w1_r: w.w1, u_w2_g: w.w2, u_w3_b: w.w3, u_w6_f: w.w6, u_w5_o: w.w5,
             u_w4: w.w4, u_b1: w.b1, u_b2: w.b2, u_b3: w.b3, u_b4: w.b4};
    mode = MODE_MLP;
    mlp_cnt = 0;
    for (int t = 0; t < 200; t++) begin
      real dv;
      dv = 0.2 + 6.0 * real'($urandom % 1000) / 1000.0;
      d_in = to_fp16(dv);
      d_hist[t % 64] = to_real(d_in);
      @(posedge clk); #1;
      if (t >= MLP_LAT - 1) begin
        real dd, h1, h2, h3, f;
        dd = d_hist[(t - (MLP_LAT - 1)) % 64];
        h1 = to_real(w.w1) * dd + to_real(w.b1); if (h1 < 0) h1 = h1 / 8.0;
        h2 = to_real(w.w2) * dd + to_real(w.b2); if (h2 < 0) h2 = h2 / 8.0;
        h3 = to_real(w.w3) * dd + to_real(w.b3); if (h3 < 0) h3 = h3 / 8.0;
        f  = $exp(to_real(w.w4) * h1 + to_real(w.w5) * h2 + to_real(w.w6) * h3 + to_real(w.b4));
        check(close(f_out, f, 0.01), $sformatf("F(%f) = %f expected %f", dd, to_real(f_out), f));
        mlp_cnt++;
      end
    end
    check(mlp_cnt > 150, "MLP results checked");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
