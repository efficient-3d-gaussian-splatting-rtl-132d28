// Gaussian feature cache (88 KB): keeps projected Gaussians on chip so that a
// Gaussian that overlaps several tiles is fetched from DRAM only once if the tile
// order revisits it soon enough.
//
// Organisation: LINES lines of 176 bits: the nine FP16 features (144 bits), the
// 28-bit Gaussian ID used as tag and a 4-bit count, 22 bytes per line, so 4096 lines
// give the paper's 88 KB. The ID and count come from the 32-bit tile-list entry
// (paper: 28-bit ID plus 4 bits recording the number of tiles the Gaussian
// intersects). The paper says only that the cache "prioritizes replacing less
// important GSs"; this design reads the count as the number of tile visits still to
// come: a fill stores (count - 1), every hit decrements it (stopping at 0), and the
// victim is an invalid line if there is one, otherwise the line with the smallest
// remaining count (lowest way on a tie). Placement is WAYS-way set associative,
// indexed by the low ID bits (this design's choice).
//
// Interface: req_valid/req_ready handshake for a list entry; the response (features
// in request order) comes on rsp_valid, one cycle after acceptance on a hit. A miss
// blocks new requests, issues mem_req_valid/mem_req_ready with the ID, and answers
// with the DRAM data in the cycle mem_rsp_valid arrives, filling the line at the
// same time. No backpressure on rsp or mem_rsp. hit/miss pulse once per lookup.
// inv clears all valid bits (new frame).
module gs_feature_cache
  import gs_pkg::*;
#(
  parameter int unsigned LINES = 4096,
  parameter int unsigned WAYS  = 4
) (
  input  logic      clk,
  input  logic      rst_n,
  input  logic      inv,
  input  logic      req_valid,
  output logic      req_ready,
  input  gs_entry_t req_entry,
  output logic      rsp_valid,
  output gs_feat_t  rsp_feat,
  output logic      mem_req_valid,
  input  logic      mem_req_ready,
  output logic [GS_ID_W-1:0] mem_req_id,
  input  logic      mem_rsp_valid,
  input  gs_feat_t  mem_rsp_feat,
  output logic      hit,
  output logic      miss
);
  localparam int unsigned SETS = LINES / WAYS;
  localparam int unsigned SW   = $clog2(SETS);
  localparam int unsigned WW   = (WAYS > 1) ? $clog2(WAYS) : 1;
  localparam int unsigned LW   = $clog2(LINES);

  typedef enum logic [1:0] {S_LOOK, S_MREQ, S_MWAIT} state_t;

  gs_feat_t                data  [LINES];
  logic [GS_ID_W-1:0]      tag   [LINES];
  logic [GS_CNT_W-1:0]     cnt   [LINES];
  logic [LINES-1:0]        vld;

  state_t     st;
  logic       r_valid;
  gs_entry_t  r_entry;
  logic [SW-1:0] set;
  logic       hit_any;
  logic [WW-1:0] hit_way, vic_way;
  logic [LW-1:0] hit_line, vic_line;

  assign set = r_entry.id[SW-1:0];

  always_comb begin
    logic [GS_CNT_W-1:0] best;
    logic found_inv;
    hit_any = 1'b0; hit_way = '0;
    vic_way = '0; best = '1; found_inv = 1'b0;
    for (int w = 0; w < WAYS; w++) begin
      logic [LW-1:0] l;
      l = LW'(set * WAYS + w);
      if (vld[l] && tag[l] == r_entry.id && !hit_any) begin
        hit_any = 1'b1; hit_way = WW'(w);
      end
      if (!found_inv) begin
        if (!vld[l]) begin
          found_inv = 1'b1; vic_way = WW'(w);
        end else if (w == 0 || cnt[l] < best) begin
          best = cnt[l]; vic_way = WW'(w);
        end
      end
    end
    hit_line = LW'(set * WAYS + hit_way);
    vic_line = LW'(set * WAYS + vic_way);
  end

  assign req_ready     = (st == S_LOOK) && !(r_valid && !hit_any);
  assign hit           = (st == S_LOOK) && r_valid && hit_any;
  assign miss          = (st == S_LOOK) && r_valid && !hit_any;
  assign mem_req_valid = (st == S_MREQ);
  assign mem_req_id    = r_entry.id;

  always_comb begin
    rsp_valid = 1'b0;
    rsp_feat  = mem_rsp_feat;
    if (hit) begin
      rsp_valid = 1'b1;
      rsp_feat  = data[hit_line];
    end else if (st == S_MWAIT && mem_rsp_valid) begin
      rsp_valid = 1'b1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st      <= S_LOOK;
      r_valid <= 1'b0;
      r_entry <= '0;
      vld     <= '0;
    end else begin
      if (inv) vld <= '0;
      case (st)
        S_LOOK: begin
          if (miss) st <= S_MREQ;
          else begin
            r_valid <= req_valid;
            if (req_valid) r_entry <= req_entry;
          end
        end
        S_MREQ:  if (mem_req_ready) st <= S_MWAIT;
        S_MWAIT: if (mem_rsp_valid) begin
          st      <= S_LOOK;
          r_valid <= 1'b0;
          if (!inv) vld[vic_line] <= 1'b1;
        end
        default: st <= S_LOOK;
      endcase
    end
  end

  // line contents: no reset needed, guarded by vld
  always_ff @(posedge clk) begin
    if (hit && cnt[hit_line] != '0) cnt[hit_line] <= cnt[hit_line] - 1'b1;
    if (st == S_MWAIT && mem_rsp_valid) begin
      data[vic_line] <= mem_rsp_feat;
      tag[vic_line]  <= r_entry.id;
      cnt[vic_line]  <= (r_entry.cnt == '0) ? '0 : r_entry.cnt - 1'b1;
    end
  end

  // a response is only produced for an accepted request
  a_no_rsp_without_req: assert property (@(posedge clk)
    rsp_valid |-> (r_valid || st == S_MWAIT));
endmodule
