// End-to-end self-checking test of the whole accelerator (gs_accel_top) at its
// default, paper-sized parameters: 16x16 PE array, 4096-line 4-way feature cache,
// 2 x 512-entry depth buffer, 2 x 256-pixel output buffer, four dividers.
//
// The testbench acts as the external DRAM: it holds a random scene of Gaussians
// over a 3 x 2 tile image, per-tile Gaussian lists with the reuse counts needed by
// the cache, a depth per list entry and the MLP parameters. It answers every
// request channel with random ready back-pressure and random latencies; depth
// responses come back out of order. One tile holds a dense cluster with more than
// 512 Gaussians (so it is rendered as several subtiles), one tile is empty, and
// the other lists have lengths that are not multiples of 256.
//
// Every output colour is compared with Eq. (5) evaluated in real arithmetic:
//   C = sum F(d_i) alpha_i c_i / sum F(d_i) alpha_i,
// F being the reference MLP (LeakyReLU slope 1/8, exp output). Pixels with a tiny
// reference denominator are only required to be finite. Each (tile, pixel,
// channel) must be written exactly once. The statistics outputs are checked against
// the scene (Gaussians streamed, cache accesses), and every mechanism of the design
// must be seen at least once: cache hits and misses, several subtiles in one tile,
// MLP <-> raster mode switches, raster stalls on cache misses, depth loading of the
// next subtile overlapped with rasterization, division of one tile overlapped with
// work on the next tile, back-pressure and out-of-order depth responses.
module tb_gs_accel_top;
  import gs_pkg::*;
  import fp16_ref_pkg::*;

  localparam int TW = 8, TX = 3, TY = 2, NT = TX * TY;
  localparam int NPOOL = 700, NCLUSTER = 420;
  localparam int NG = NPOOL + NCLUSTER;
  localparam int MAXL = 4096;
  localparam int SUBW = 9;   // $clog2(512)

  logic clk = 0, rst_n = 0;
  logic start = 0, done;
  logic [TW-1:0] tiles_x = TW'(TX), tiles_y = TW'(TY);
  mlp_w_t mlp_w;
  logic hdr_req_valid, hdr_req_ready = 0, hdr_rsp_valid = 0;
  logic [2*TW-1:0] hdr_req_tile;
  logic [31:0] hdr_rsp_base = 0;
  logic [15:0] hdr_rsp_num = 0;
  logic lst_req_valid, lst_req_ready = 0, lst_rsp_valid = 0;
  logic [31:0] lst_req_addr;
  gs_entry_t lst_rsp_entry = '0;
  logic dep_req_valid, dep_req_ready = 0, dep_rsp_valid = 0;
  logic [31:0] dep_req_addr;
  logic [SUBW:0] dep_req_tag, dep_rsp_tag = '0;
  fp16_t dep_rsp_d = '0;
  logic feat_req_valid, feat_req_ready = 0, feat_rsp_valid = 0;
  logic [GS_ID_W-1:0] feat_req_id;
  gs_feat_t feat_rsp = '0;
  logic pix_valid;
  logic [TW-1:0] pix_tx, pix_ty;
  logic [9:0] pix_base;
  fp16_t pix_val [4];
  logic [31:0] stat_hits, stat_misses, stat_tiles, stat_subtiles, stat_mlp_rows,
               stat_gaussians, stat_overlap_cycles, stat_mode_switches, stat_stall_cycles;

  gs_accel_top dut (.*);
  always #5 clk = ~clk;

  // ---------------- scene ----------------
  gs_feat_t   g [NG];
  logic [27:0] gid [NG];
  int         uses [NG];
  int         t_base [NT], t_num [NT];
  int         lst_g [MAXL];          // list address -> Gaussian index
  gs_entry_t  lst_mem [MAXL];
  fp16_t      dep_mem [MAXL];
  int         nlist = 0;
  gs_feat_t   feat_by_id [logic [27:0]];
  fp16_t      img [TY*16][TX*16][3];
  int         written [TY*16][TX*16][3];

  int checks = 0, failures = 0;
  // mechanism counters seen by the testbench
  int n_bp = 0, n_ooo = 0, n_div_overlap = 0, n_feat_req = 0, n_lst_rsp = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 15) $display("FAIL %s", what);
    end
  endtask

  function automatic real urand(input real lo, input real hi);
    return lo + (hi - lo) * real'($urandom % 100000) / 100000.0;
  endfunction

  function automatic real mlp_ref(input real d);
    real h1, h2, h3;
    h1 = to_real(mlp_w.w1) * d + to_real(mlp_w.b1); if (h1 < 0) h1 = h1 / 8.0;
    h2 = to_real(mlp_w.w2) * d + to_real(mlp_w.b2); if (h2 < 0) h2 = h2 / 8.0;
    h3 = to_real(mlp_w.w3) * d + to_real(mlp_w.b3); if (h3 < 0) h3 = h3 / 8.0;
    return $exp(to_real(mlp_w.w4) * h1 + to_real(mlp_w.w5) * h2 + to_real(mlp_w.w6) * h3
                + to_real(mlp_w.b4));
  endfunction

  function automatic bit in_tile(input int i, input int t);
    real mx, my, x0, y0;
    mx = to_real(g[i].mu_x); my = to_real(g[i].mu_y);
    x0 = real'((t % TX) * 16); y0 = real'((t / TX) * 16);
    return mx > x0 - 8.0 && mx < x0 + 24.0 && my > y0 - 8.0 && my < y0 + 24.0;
  endfunction

  task automatic build_scene();
    for (int i = 0; i < NG; i++) begin
      real a, b, c;
      a = urand(0.03, 0.25);
      b = urand(0.03, 0.25);
      c = (urand(0.0, 1.0) - 0.5) * $sqrt(a * b);
      if (i < NPOOL) begin
        g[i].mu_x = to_fp16(urand(-6.0, 54.0));
        g[i].mu_y = to_fp16(urand(-6.0, 38.0));
      end else begin                                  // cluster inside tile (1,0)
        g[i].mu_x = to_fp16(urand(17.0, 31.0));
        g[i].mu_y = to_fp16(urand(1.0, 15.0));
      end
      g[i].na = to_fp16(-a / 2.0); g[i].nb = to_fp16(-b / 2.0); g[i].c = to_fp16(c);
      g[i].o = to_fp16(urand(0.05, 0.95));
      g[i].r = to_fp16(urand(0.0, 1.0)); g[i].g = to_fp16(urand(0.0, 1.0));
      g[i].b = to_fp16(urand(0.0, 1.0));
      gid[i] = 28'(i * 7919 + 12345);
      feat_by_id[gid[i]] = g[i];
      uses[i] = 0;
    end
    // tile (2,1) is left empty; the others list every Gaussian near them
    for (int t = 0; t < NT; t++)
      if (t != NT - 1)
        for (int i = 0; i < NG; i++) if (in_tile(i, t)) uses[i]++;
    for (int t = 0; t < NT; t++) begin
      t_base[t] = nlist + 3;          // lists are not packed back to back
      nlist     = t_base[t];
      t_num[t]  = 0;
      if (t != NT - 1)
        for (int i = 0; i < NG; i++)
          if (in_tile(i, t)) begin
            lst_g[nlist]   = i;
            lst_mem[nlist] = '{cnt: 4'(uses[i] > 15 ? 15 : uses[i]), id: gid[i]};
            dep_mem[nlist] = to_fp16(urand(0.3, 6.0));
            nlist++;
            t_num[t]++;
          end
      $display("tile %0d: %0d Gaussians", t, t_num[t]);
    end
  endtask

  // ---------------- DRAM model ----------------
  typedef struct { int due; int addr; int tag; } pend_t;
  pend_t lq[$], dq[$];
  int hdr_due = -1, hdr_t = 0, feat_due = -1, cyc = 0;
  logic [27:0] feat_id_r;

  always @(posedge clk) begin
    cyc <= cyc + 1;
    hdr_req_ready  <= ($urandom % 4) != 0;
    lst_req_ready  <= ($urandom % 5) != 0;
    dep_req_ready  <= ($urandom % 3) != 0;
    feat_req_ready <= ($urandom % 4) != 0;
    if (lst_req_valid && !lst_req_ready) n_bp++;
    if (dep_req_valid && !dep_req_ready) n_bp++;
    // header
    hdr_rsp_valid <= 1'b0;
    if (hdr_req_valid && hdr_req_ready) begin
      hdr_t   = int'(hdr_req_tile);
      hdr_due = cyc + 2 + int'($urandom % 10);
      check(hdr_t < NT, $sformatf("header request for tile %0d", hdr_t));
    end
    if (hdr_due >= 0 && cyc >= hdr_due) begin
      hdr_rsp_valid <= 1'b1;
      hdr_rsp_base  <= 32'(t_base[hdr_t]);
      hdr_rsp_num   <= 16'(t_num[hdr_t]);
      hdr_due = -1;
    end
    // list: in order
    if (lst_req_valid && lst_req_ready) lq.push_back('{cyc + 3 + int'($urandom % 12), int'(lst_req_addr), 0});
    lst_rsp_valid <= 1'b0;
    if (lq.size() > 0 && cyc >= lq[0].due) begin
      pend_t p;
      p = lq.pop_front();
      lst_rsp_valid <= 1'b1;
      lst_rsp_entry <= lst_mem[p.addr];
      n_lst_rsp++;
    end
    // depth: any order
    if (dep_req_valid && dep_req_ready)
      dq.push_back('{cyc + 3 + int'($urandom % 20), int'(dep_req_addr), int'(dep_req_tag)});
    dep_rsp_valid <= 1'b0;
    begin
      int pick;
      pick = -1;
      for (int k = 0; k < dq.size(); k++)
        if (cyc >= dq[k].due && (pick < 0 || ($urandom % 2) == 0)) pick = k;
      if (pick >= 0) begin
        if (pick != 0) n_ooo++;
        dep_rsp_valid <= 1'b1;
        dep_rsp_tag   <= (SUBW+1)'(dq[pick].tag);
        dep_rsp_d     <= dep_mem[dq[pick].addr];
        dq.delete(pick);
      end
    end
    // features: one miss outstanding
    feat_rsp_valid <= 1'b0;
    if (feat_req_valid && feat_req_ready) begin
      feat_id_r = feat_req_id;
      feat_due  = cyc + 4 + int'($urandom % 16);
      n_feat_req++;
      check(feat_by_id.exists(feat_req_id), "feature request for an unknown ID");
    end
    if (feat_due >= 0 && cyc >= feat_due) begin
      feat_rsp_valid <= 1'b1;
      feat_rsp       <= feat_by_id[feat_id_r];
      feat_due = -1;
    end
    // pixel capture
    if (pix_valid && rst_n) begin
      for (int k = 0; k < 4; k++) begin
        int e, px, py;
        e  = int'(pix_base) + k;
        px = int'(pix_tx) * 16 + (e / 3) % 16;
        py = int'(pix_ty) * 16 + (e / 3) / 16;
        if (e < 768 && px < TX * 16 && py < TY * 16) begin
          img[py][px][e % 3] = pix_val[k];
          written[py][px][e % 3]++;
        end else check(0, $sformatf("pixel out of range tile %0d,%0d e %0d", pix_tx, pix_ty, e));
      end
      if (dut.gs_valid || dut.mlp_valid || dut.u_ctrl.ld_active) n_div_overlap++;
    end
  end

  // ---------------- watchdog ----------------
  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- stimulus and checks ----------------
  initial begin
    int total, n_skip;
    real worst;
    mlp_w.w1 = to_fp16(-0.8); mlp_w.w2 = to_fp16(0.6);  mlp_w.w3 = to_fp16(-0.3);
    mlp_w.w4 = to_fp16(0.9);  mlp_w.w5 = to_fp16(-0.7); mlp_w.w6 = to_fp16(0.5);
    mlp_w.b1 = to_fp16(0.4);  mlp_w.b2 = to_fp16(-0.2); mlp_w.b3 = to_fp16(0.1);
    mlp_w.b4 = to_fp16(-0.3);
    foreach (written[y, x, ch]) written[y][x][ch] = 0;
    build_scene();
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    @(posedge clk); #1 start = 1;
    @(posedge clk); #1 start = 0;
    while (!done) @(posedge clk);
    $display("frame done after %0d cycles", cyc);
    repeat (5) @(posedge clk);

    // image check
    n_skip = 0; worst = 0.0;
    for (int t = 0; t < NT; t++)
      for (int p = 0; p < 256; p++) begin
        real den, num [3];
        int px, py;
        px = (t % TX) * 16 + p % 16;
        py = (t / TX) * 16 + p / 16;
        den = 0.0; num[0] = 0.0; num[1] = 0.0; num[2] = 0.0;
        for (int j = t_base[t]; j < t_base[t] + t_num[t]; j++) begin
          int i;
          real dx, dy, al, f;
          i  = lst_g[j];
          dx = real'(px) - to_real(g[i].mu_x);
          dy = real'(py) - to_real(g[i].mu_y);
          al = to_real(g[i].o) * $exp(to_real(g[i].c) * dx * dy + to_real(g[i].na) * dx * dx
                                      + to_real(g[i].nb) * dy * dy);
          f  = mlp_ref(to_real(dep_mem[j]));
          den += f * al;
          num[0] += f * al * to_real(g[i].r);
          num[1] += f * al * to_real(g[i].g);
          num[2] += f * al * to_real(g[i].b);
        end
        for (int ch = 0; ch < 3; ch++) begin
          real got, exp_v, err;
          check(written[py][px][ch] == 1,
                $sformatf("pixel %0d,%0d ch %0d written %0d times", px, py, ch, written[py][px][ch]));
          got = to_real(img[py][px][ch]);
          if (t_num[t] == 0) begin
            check(img[py][px][ch] == 16'h0000, $sformatf("empty tile pixel %0d,%0d not 0", px, py));
          end else if (den < 0.02) begin
            n_skip++;
            check(img[py][px][ch][14:10] != 5'h1f, $sformatf("pixel %0d,%0d not finite", px, py));
          end else begin
            exp_v = num[ch] / den;
            err = got > exp_v ? got - exp_v : exp_v - got;
            if (err > worst) worst = err;
            check(err <= 0.03, $sformatf("pixel %0d,%0d ch %0d: %f vs %f (den %f)",
                                         px, py, ch, got, exp_v, den));
          end
        end
      end
    $display("worst colour error %f, %0d low-coverage values", worst, n_skip);

    // statistics
    total = 0;
    for (int t = 0; t < NT; t++) total += t_num[t];
    check(stat_tiles == NT, $sformatf("stat_tiles %0d", stat_tiles));
    check(stat_gaussians == 32'(total), $sformatf("stat_gaussians %0d vs %0d", stat_gaussians, total));
    check(stat_hits + stat_misses == 32'(total), "hits + misses != list entries");
    check(stat_misses == 32'(n_feat_req), "misses != feature fetches");
    check(n_lst_rsp == total, "list entries fetched");
    $display("hits %0d misses %0d tiles %0d subtiles %0d mlp_rows %0d mode_switches %0d",
             stat_hits, stat_misses, stat_tiles, stat_subtiles, stat_mlp_rows, stat_mode_switches);
    $display("stall %0d overlap %0d div_overlap %0d backpressure %0d out_of_order %0d",
             stat_stall_cycles, stat_overlap_cycles, n_div_overlap, n_bp, n_ooo);
    check(stat_hits > 0,                   "no cache hit");
    check(stat_misses > 0,                 "no cache miss");
    check(stat_subtiles > stat_tiles,      "no tile split into subtiles");
    check(stat_mlp_rows > 0,               "no MLP row");
    check(stat_mode_switches >= 2 * stat_subtiles, "mode switches");
    check(stat_stall_cycles > 0,           "no raster stall");
    check(stat_overlap_cycles > 0,         "no depth load overlapped with rasterization");
    check(n_div_overlap > 0,               "no division overlapped with the next tile");
    check(n_bp > 0,                        "no back-pressure");
    check(n_ooo > 0,                       "no out-of-order depth response");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
