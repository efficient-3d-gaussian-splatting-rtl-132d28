// Self-checking test of the controller with behavioural models of everything
// around it: coordinate generator (a fixed tile sequence), DRAM channels (random
// ready, random latency, depth responses out of order), feature cache (random
// latency, the returned feature carries the list address it belongs to), depth
// buffer (F(d) read returns its own {bank, index}), compute array (MLP latency and
// busy drain) and division array (busy for 192 cycles).
// Checks: every tile's Gaussians reach the array exactly once, in list order, each
// with the F(d) of its own depth-buffer entry and bank; MLP rows are issued only
// after all depths of the subtile have arrived, row count = ceil(n/256), F write-
// back rows match the issue order and come MLP_LAT cycles after the array input;
// no Gaussian is issued in MLP mode; accumulators are cleared on the first and
// restored on every later subtile and saved once per subtile; division starts once
// per tile with the right coordinates and never while busy; done comes after the
// last tile. Tiles cover n = 0, n < 256, n = 256, n = 512, n = 513 and n > 1024.
module tb_controller;
  import gs_pkg::*;
  localparam int TW = 8, NT = 7, SUB = 512;
  localparam int IW = 9;
  int nums [NT] = '{37, 0, 256, 1300, 512, 513, 200};

  logic clk = 0, rst_n = 0, start = 0, done;
  logic [TW-1:0] tiles_x = 8'd4;
  logic cg_start, cg_next, cg_valid;
  logic [TW-1:0] cg_tx, cg_ty;
  logic hdr_req_valid, hdr_req_ready = 0, hdr_rsp_valid = 0;
  logic [2*TW-1:0] hdr_req_tile;
  logic [31:0] hdr_rsp_base = 0;
  logic [15:0] hdr_rsp_num = 0;
  logic lst_req_valid, lst_req_ready = 0, lst_rsp_valid = 0;
  logic [31:0] lst_req_addr;
  gs_entry_t lst_rsp_entry = '0;
  logic dep_req_valid, dep_req_ready = 0, dep_rsp_valid = 0;
  logic [31:0] dep_req_addr;
  logic [IW:0] dep_req_tag;
  logic cache_req_valid, cache_req_ready = 0, cache_rsp_valid = 0;
  gs_entry_t cache_req_entry;
  gs_feat_t cache_rsp_feat = '0;
  logic db_rd_valid, db_rd_bank, db_fw_valid, db_fw_bank, db_fr_bank;
  logic [0:0] db_rd_row, db_fw_row;
  logic [IW-1:0] db_fr_idx;
  fp16_t db_fr_f = '0;
  pe_mode_t mode;
  logic ld_w, mlp_valid, mlp_out_valid, gs_valid, array_busy = 0, acc_clr, acc_ld;
  gs_feat_t gs;
  fp16_t gs_f;
  logic ob_wr_en, ob_bank, div_start, div_busy = 0, div_busy_bank = 0;
  logic [TW-1:0] div_tx, div_ty;
  logic [31:0] stat_tiles, stat_subtiles, stat_mlp_rows, stat_gaussians, stat_overlap_cycles,
               stat_mode_switches, stat_stall_cycles;

  controller #(.SUB(SUB), .N(256), .TW(TW)) dut (.*);
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 15) $display("FAIL %s", what); end
  endtask

  // ---- coordinate generator: tile k at (k % 4, k / 4)
  int cg_k = 0;
  assign cg_valid = cg_k < NT;
  assign cg_tx = TW'(cg_k % 4);
  assign cg_ty = TW'(cg_k / 4);
  function automatic int tbase(input int t); return 1000 * t + 7; endfunction

  // ---- state tracked by the checker
  int cur_t = -1, got_in_tile = 0, sub_in_tile = 0, sub_base = 0, sub_cnt = 0;
  int div_cnt = 0, div_left = 0, n_clr = 0, n_ld = 0, n_save = 0, n_ldw = 0;
  int rows_issued = 0, rows_back = 0, cur_bank = 0, n_overlap = 0;
  bit wr_mask [2][SUB];
  int rd_hist [$];   // row issued, per MLP input cycle
  logic [MLP_LAT:1] md = '0;
  assign mlp_out_valid = md[MLP_LAT];
  int cyc = 0, hdr_due = -1, hdr_t = 0;
  typedef struct { int due; int addr; int tag; } pend_t;
  pend_t lq[$], dq[$];
  int cq_due = -1;
  gs_entry_t cq_e;
  gs_feat_t  cf;

  always @(posedge clk) if (rst_n) begin
    cyc <= cyc + 1;
    hdr_req_ready   <= ($urandom % 3) != 0;
    lst_req_ready   <= ($urandom % 4) != 0;
    dep_req_ready   <= ($urandom % 3) != 0;
    if (cg_start) cg_k = 0;
    if (cg_next) cg_k = cg_k + 1;
    // header
    hdr_rsp_valid <= 0;
    if (hdr_req_valid && hdr_req_ready) begin
      hdr_t = int'(hdr_req_tile) / 4 * 0 + cg_k;    // tile index = ty*4+tx = k
      check(int'(hdr_req_tile) == cg_k, "header tile index");
      hdr_due = cyc + 1 + int'($urandom % 5);
    end
    if (hdr_due >= 0 && cyc >= hdr_due) begin
      hdr_rsp_valid <= 1; hdr_rsp_base <= 32'(tbase(hdr_t)); hdr_rsp_num <= 16'(nums[hdr_t]);
      hdr_due = -1;
      cur_t = hdr_t; got_in_tile = 0; sub_in_tile = 0;
    end
    // list channel: the entry id is its address
    if (lst_req_valid && lst_req_ready) lq.push_back('{cyc + 1 + int'($urandom % 6), int'(lst_req_addr), 0});
    lst_rsp_valid <= 0;
    if (lq.size() > 0 && cyc >= lq[0].due) begin
      pend_t p; p = lq.pop_front();
      lst_rsp_valid <= 1; lst_rsp_entry <= '{cnt: 4'd1, id: 28'(p.addr)};
    end
    // depth channel: out of order, writes tracked in wr_mask
    if (dep_req_valid && dep_req_ready) begin
      check(int'(dep_req_addr) >= tbase(cur_t) && int'(dep_req_addr) < tbase(cur_t) + nums[cur_t],
            "depth address outside the tile list");
      check(int'(dep_req_tag[IW-1:0]) == (int'(dep_req_addr) - tbase(cur_t)) % SUB, "depth tag index");
      dq.push_back('{cyc + 1 + int'($urandom % 12), int'(dep_req_addr), int'(dep_req_tag)});
      if (dut.sm_active) n_overlap++;
    end
    dep_rsp_valid <= 0;
    begin
      int pick; pick = -1;
      for (int k = 0; k < dq.size(); k++) if (cyc >= dq[k].due && (pick < 0 || $urandom % 2 == 0)) pick = k;
      if (pick >= 0) begin
        dep_rsp_valid <= 1;
        wr_mask[dq[pick].tag >> IW][dq[pick].tag % SUB] = 1;
        dq.delete(pick);
      end
    end
    // feature cache model: one request at a time, feature mu_x/mu_y carry the address
    cache_rsp_valid <= 0;
    if (cache_req_valid && cache_req_ready) begin cq_e = cache_req_entry; cq_due = cyc + int'($urandom % 4); end
    if (cq_due >= 0 && cyc >= cq_due) begin
      cache_rsp_valid <= 1;
      cf = '0; cf.mu_x = cq_e.id[15:0]; cf.mu_y = 16'(cq_e.id[27:16]);
      cache_rsp_feat  <= cf;
      cq_due = -1;
    end
    db_fr_f <= {db_fr_bank, 6'd0, db_fr_idx};
    cache_req_ready <= cq_due < 0 && ($urandom % 3) != 0;
    // array model
    md <= {md[MLP_LAT-1:1], mlp_valid};
    array_busy <= gs_valid || (array_busy && ($urandom % 6 != 0));
    // division model
    if (div_left > 0) div_left--;
    div_busy <= div_left > 0;
    // ---- checks on controller outputs
    if (ld_w) begin
      n_ldw++;
      sub_base = got_in_tile;
      sub_cnt  = nums[cur_t] - got_in_tile > SUB ? SUB : nums[cur_t] - got_in_tile;
      cur_bank = int'(dut.db);
      rows_issued = 0; rows_back = 0; rd_hist.delete();
      for (int k = 0; k < sub_cnt; k++)
        check(wr_mask[cur_bank][k], $sformatf("tile %0d: MLP starts before depth %0d arrived", cur_t, k));
    end
    if (db_rd_valid) begin
      check(mode == MODE_MLP, "depth row read outside MLP mode");
      check(int'(db_rd_bank) == cur_bank, "MLP reads the wrong bank");
      rd_hist.push_back(int'(db_rd_row));
      check(int'(db_rd_row) == rows_issued, "MLP row order");
      rows_issued++;
    end
    if (db_fw_valid) begin
      check(rd_hist.size() > 0 && int'(db_fw_row) == rd_hist[0], "F write-back row");
      check(int'(db_fw_bank) == cur_bank, "F write-back bank");
      if (rd_hist.size() > 0) void'(rd_hist.pop_front());
      rows_back++;
    end
    if (acc_clr || acc_ld) begin
      check(rows_back == (sub_cnt + 255) / 256 && rows_issued == rows_back,
            $sformatf("tile %0d rows %0d/%0d for %0d", cur_t, rows_issued, rows_back, sub_cnt));
      check(mode == MODE_RASTER, "raster reconfiguration in MLP mode");
      if (acc_clr) begin n_clr++; check(sub_in_tile == 0, "clear on a later subtile"); end
      if (acc_ld)  begin n_ld++;  check(sub_in_tile > 0, "restore on the first subtile"); end
      for (int k = 0; k < SUB; k++) wr_mask[cur_bank][k] = 0;
    end
    if (gs_valid) begin
      int k;
      k = got_in_tile - sub_base;
      check(mode == MODE_RASTER, "Gaussian issued in MLP mode");
      check(int'({gs.mu_y[11:0], gs.mu_x}) == tbase(cur_t) + got_in_tile,
            $sformatf("tile %0d Gaussian %0d out of order", cur_t, got_in_tile));
      check(gs_f == {1'(cur_bank), 6'd0, 9'(k)}, $sformatf("tile %0d Gaussian %0d wrong F(d)", cur_t, got_in_tile));
      got_in_tile++;
    end
    if (ob_wr_en) begin
      n_save++;
      check(got_in_tile == sub_base + sub_cnt, "save before the subtile finished");
      check(!array_busy, "save while the array is busy");
      sub_in_tile++;
    end
    if (div_start) begin
      check(!div_busy, "division started while busy");
      check(got_in_tile == nums[cur_t], $sformatf("tile %0d: %0d of %0d Gaussians", cur_t, got_in_tile, nums[cur_t]));
      check(int'(div_tx) == cur_t % 4 && int'(div_ty) == cur_t / 4, "division tile coordinates");
      check(sub_in_tile == (nums[cur_t] == 0 ? 1 : (nums[cur_t] + SUB - 1) / SUB), "subtiles per tile");
      div_cnt++;
      div_left = 192;
      div_busy_bank <= ob_bank;
    end
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int tot;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    @(posedge clk); #1 start = 1;
    @(posedge clk); #1 start = 0;
    while (!done) @(posedge clk);
    #1;
    tot = 0; foreach (nums[t]) tot += nums[t];
    check(div_cnt == NT, $sformatf("%0d divisions", div_cnt));
    check(n_clr == NT, "clears");
    check(n_save == int'(stat_subtiles) && n_ldw == n_save, "subtile count");
    check(n_ld == n_save - NT, "restores");
    check(int'(stat_gaussians) == tot, "Gaussians streamed");
    check(n_overlap > 0 && stat_overlap_cycles > 0, "no depth load overlapped with rasterization");
    check(stat_mode_switches == 32'(2 * n_save), "mode switches");
    $display("subtiles %0d restores %0d overlap %0d stalls %0d", n_save, n_ld, n_overlap, stat_stall_cycles);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
