// Self-checking test of the compute unit (rpe_array) at full 16x16 size.
//
// Rasterization: random Gaussians around one tile (with bubbles between them) are
// streamed at one per cycle; after the pipeline drains, all 256 pixels' four
// accumulators are compared with Eq. (5) computed in real arithmetic from the
// Gaussian parameters: alpha = o*exp(c*dx*dy - a/2*dx^2 - b/2*dy^2). The drain time
// (RAS_LAT cycles after the last Gaussian) is checked through the busy flag.
// MLP mode: four consecutive depth rows; each F(d) must match the reference MLP
// and appear exactly MLP_LAT cycles after its row.
module tb_rpe_array;
  import gs_pkg::*;
  import fp16_ref_pkg::*;
  localparam int N = 16;
  localparam int NG = 120;
  logic clk = 0, rst_n = 0;
  pe_mode_t mode = MODE_RASTER;
  fp16_t x_coord [N], y_coord [N];
  logic gs_valid = 0, busy, ld_w = 0, mlp_valid = 0, mlp_out_valid, acc_clr = 0, acc_ld = 0;
  gs_feat_t gs;
  fp16_t gs_f;
  mlp_w_t w;
  fp16_t mlp_d [N*N], f_row [N*N];
  pix_acc_t acc_ld_val [N*N], acc [N*N];
  gs_feat_t g [NG];
  fp16_t gf [NG];
  int checks = 0, failures = 0;

  rpe_array #(.N(N)) dut (.*);
  always #5 clk = ~clk;

  function automatic fp16_t rr(input real lo, input real hi);
    return to_fp16(lo + (hi - lo) * real'($urandom % 10000) / 10000.0);
  endfunction

  function automatic bit close(input fp16_t got, input real ref_v, input real tol);
    real gv = to_real(got);
    real err = (gv > ref_v) ? gv - ref_v : ref_v - gv;
    real mag = (ref_v < 0.0) ? -ref_v : ref_v;
    return err <= tol * mag + 2e-3;
  endfunction

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 12) $display("FAIL %s", what);
    end
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int cyc_last, cyc_idle;
    real d_row [4][N*N];
    foreach (acc_ld_val[p]) acc_ld_val[p] = '0;
    foreach (mlp_d[p]) mlp_d[p] = '0;
    w = '0; gs = '0; gs_f = '0;
    for (int k = 0; k < N; k++) begin
      x_coord[k] = to_fp16(real'(48 + k));    // tile (3, 2)
      y_coord[k] = to_fp16(real'(32 + k));
    end
    for (int i = 0; i < NG; i++) begin
      real a, b, c;
      a = 0.02 + 0.2 * real'($urandom % 1000) / 1000.0;
      b = 0.02 + 0.2 * real'($urandom % 1000) / 1000.0;
      c = (real'($urandom % 1000) / 1000.0 - 0.5) * $sqrt(a * b);
      g[i].mu_x = rr(44.0, 68.0);  g[i].mu_y = rr(28.0, 52.0);
      g[i].na = to_fp16(-a / 2.0); g[i].nb = to_fp16(-b / 2.0); g[i].c = to_fp16(c);
      g[i].o = rr(0.1, 0.99);
      g[i].r = rr(0.0, 1.0); g[i].g = rr(0.0, 1.0); g[i].b = rr(0.0, 1.0);
      gf[i] = rr(0.05, 1.5);
    end
    repeat (2) @(posedge clk);
    #1 rst_n = 1; acc_clr = 1;
    @(posedge clk); #1 acc_clr = 0;
    for (int i = 0; i < NG; i++) begin
      gs_valid = 1; gs = g[i]; gs_f = gf[i];
      @(posedge clk); #1;
      if (i % 7 == 3) begin                    // a bubble
        gs_valid = 0; gs = '1; gs_f = '1;
        @(posedge clk); #1;
      end
    end
    gs_valid = 0; gs = '1; gs_f = '1;
    cyc_last = 0;
    while (busy) begin @(posedge clk); #1; cyc_last++; end
    check(cyc_last == RAS_LAT, $sformatf("drain took %0d cycles", cyc_last));
    for (int r = 0; r < N; r++) for (int k = 0; k < N; k++) begin
      real den, nr, ng, nb;
      den = 0; nr = 0; ng = 0; nb = 0;
      for (int i = 0; i < NG; i++) begin
        real dx, dy, al;
        dx = real'(48 + k) - to_real(g[i].mu_x);
        dy = real'(32 + r) - to_real(g[i].mu_y);
        al = to_real(g[i].o) * $exp(to_real(g[i].c) * dx * dy + to_real(g[i].na) * dx * dx
                                    + to_real(g[i].nb) * dy * dy);
        den += to_real(gf[i]) * al;
        nr  += to_real(gf[i]) * al * to_real(g[i].r);
        ng  += to_real(gf[i]) * al * to_real(g[i].g);
        nb  += to_real(gf[i]) * al * to_real(g[i].b);
      end
      check(close(acc[r*N+k].den, den, 0.03), $sformatf("pix %0d,%0d den %f vs %f", k, r, to_real(acc[r*N+k].den), den));
      check(close(acc[r*N+k].r, nr, 0.03), $sformatf("pix %0d,%0d R %f vs %f", k, r, to_real(acc[r*N+k].r), nr));
      check(close(acc[r*N+k].g, ng, 0.03), $sformatf("pix %0d,%0d G", k, r));
      check(close(acc[r*N+k].b, nb, 0.03), $sformatf("pix %0d,%0d B", k, r));
    end

    // ---------------- MLP mode ----------------
    mode = MODE_MLP;
    w.w1 = to_fp16(-0.8); w.w2 = to_fp16(0.6);  w.w3 = to_fp16(-0.3);
    w.w4 = to_fp16(0.9);  w.w5 = to_fp16(-0.7); w.w6 = to_fp16(0.5);
    w.b1 = to_fp16(0.4);  w.b2 = to_fp16(-0.2); w.b3 = to_fp16(0.1); w.b4 = to_fp16(-0.3);
    ld_w = 1; @(posedge clk); #1 ld_w = 0;
    for (int row = 0; row < 4; row++) begin
      mlp_valid = 1;
      foreach (mlp_d[p]) begin
        mlp_d[p] = rr(0.2, 8.0);
        d_row[row][p] = to_real(mlp_d[p]);
      end
      @(posedge clk); #1;
    end
    mlp_valid = 0;
    cyc_idle = 4;
    for (int row = 0; row < 4; row++) begin
      while (!mlp_out_valid) begin @(posedge clk); #1; cyc_idle++; end
      check(cyc_idle == MLP_LAT + row, $sformatf("MLP row %0d after %0d cycles", row, cyc_idle));
      foreach (f_row[p]) begin
        real dd, h1, h2, h3, f;
        dd = d_row[row][p];
        h1 = to_real(w.w1) * dd + to_real(w.b1); if (h1 < 0) h1 = h1 / 8.0;
        h2 = to_real(w.w2) * dd + to_real(w.b2); if (h2 < 0) h2 = h2 / 8.0;
        h3 = to_real(w.w3) * dd + to_real(w.b3); if (h3 < 0) h3 = h3 / 8.0;
        f  = $exp(to_real(w.w4) * h1 + to_real(w.w5) * h2 + to_real(w.w6) * h3 + to_real(w.b4));
        check(close(f_row[p], f, 0.01), $sformatf("row %0d pe %0d F %f vs %f", row, p, to_real(f_row[p]), f));
      end
      @(posedge clk); #1; cyc_idle++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
