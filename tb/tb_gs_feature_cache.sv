// Self-checking test of gs_feature_cache (reduced to 64 lines, 4 ways, so that
// evictions happen often). Requests for IDs drawn from a small pool stream in with
// random gaps; a DRAM model answers misses after a random delay with features that
// are a fixed function of the ID. Checked: every response carries the right
// features and comes in request order; each lookup's hit or miss matches a
// reference model of the replacement rule (invalid line first, else the smallest
// remaining tile count); a hit answers one cycle after acceptance. Also checks that
// invalidation empties the cache.
module tb_gs_feature_cache;
  import gs_pkg::*;
  localparam int LINES = 64, WAYS = 4, SETS = LINES / WAYS;
  logic clk = 0, rst_n = 0, inv = 0;
  logic req_valid = 0, req_ready, rsp_valid, mem_req_valid, mem_req_ready = 0, mem_rsp_valid = 0;
  gs_entry_t req_entry;
  gs_feat_t rsp_feat, mem_rsp_feat;
  logic [GS_ID_W-1:0] mem_req_id;
  logic hit, miss;
  int checks = 0, failures = 0, n_hit = 0, n_miss = 0;

  // reference model
  logic [GS_ID_W-1:0] m_tag [SETS][WAYS];
  int  m_cnt [SETS][WAYS];
  bit  m_vld [SETS][WAYS];
  gs_entry_t exp_q [$];

  gs_feature_cache #(.LINES(LINES), .WAYS(WAYS)) dut (.*);
  always #5 clk = ~clk;

  function automatic gs_feat_t feat_of(input logic [GS_ID_W-1:0] id);
    gs_feat_t f;
    for (int i = 0; i < 9; i++) f[i*16 +: 16] = 16'(id * (i + 3) + 16'h1234 * i);
    return f;
  endfunction

  // returns 1 on hit, updating the model
  function automatic bit model_access(input gs_entry_t e);
    int s, v, best;
    bit found;
    s = int'(e.id) % SETS;
    for (int w = 0; w < WAYS; w++)
      if (m_vld[s][w] && m_tag[s][w] == e.id) begin
        if (m_cnt[s][w] > 0) m_cnt[s][w]--;
        return 1;
      end
    v = 0; best = 99; found = 0;
    for (int w = 0; w < WAYS; w++) begin
      if (!found && !m_vld[s][w]) begin v = w; found = 1; end
      if (!found && m_vld[s][w] && m_cnt[s][w] < best) begin v = w; best = m_cnt[s][w]; end
    end
    m_vld[s][v] = 1; m_tag[s][v] = e.id; m_cnt[s][v] = (e.cnt == 0) ? 0 : int'(e.cnt) - 1;
    return 0;
  endfunction

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 12) $display("FAIL %s", what); end
  endtask

  // DRAM model
  initial begin
    forever begin
      @(posedge clk); #1;
      mem_rsp_valid = 0;
      mem_req_ready = ($urandom % 3 != 0);
      if (mem_req_valid && mem_req_ready) begin
        logic [GS_ID_W-1:0] id;
        id = mem_req_id;
        @(posedge clk); #1 mem_req_ready = 0;
        repeat ($urandom % 4) begin @(posedge clk); #1; end
        mem_rsp_valid = 1; mem_rsp_feat = feat_of(id);
      end
    end
  end

  // response checker
  always @(posedge clk) if (rst_n) begin
    if (hit || miss) begin
      bit h;
      chk(exp_q.size() > 0, "lookup without request");
      h = model_access(exp_q[0]);
      chk(h == hit, $sformatf("id %0d hit=%0d expected %0d", exp_q[0].id, hit, h));
      if (hit) n_hit++; else n_miss++;
    end
    if (rsp_valid) begin
      chk(exp_q.size() > 0, "response without request");
      if (exp_q.size() > 0) begin
        chk(rsp_feat == feat_of(exp_q[0].id), $sformatf("features of id %0d", exp_q[0].id));
        void'(exp_q.pop_front());
      end
    end
    if (req_valid && req_ready) exp_q.push_back(req_entry);
  end

  initial begin
    repeat (30000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    foreach (m_vld[s, w]) m_vld[s][w] = 0;
    req_entry = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int i = 0; i < 3000; i++) begin
      if (i == 1500) begin
        // invalidate: the model forgets everything too
        req_valid = 0;
        wait (exp_q.size() == 0);
        @(posedge clk); #1 inv = 1;
        @(posedge clk); #1 inv = 0;
        foreach (m_vld[s, w]) m_vld[s][w] = 0;
      end
      req_valid = ($urandom % 4 != 0);
      req_entry.id  = GS_ID_W'(($urandom % 120) * 7 + 28'h1000);
      req_entry.cnt = 4'($urandom % 16);
      if (req_valid) begin
        bit acc;
        do begin
          @(negedge clk) acc = req_ready;
          @(posedge clk); #1;
        end while (!acc);
        req_valid = 0;
      end else begin
        @(posedge clk); #1;
      end
    end
    req_valid = 0;
    repeat (20) @(posedge clk);
    chk(exp_q.size() == 0, "all requests answered");
    chk(n_hit > 300 && n_miss > 300, $sformatf("hits %0d misses %0d", n_hit, n_miss));
    $display("hits=%0d misses=%0d", n_hit, n_miss);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
