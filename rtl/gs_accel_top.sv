// Top level of the 3DGS rendering accelerator: coordinate generator, controller,
// Gaussian feature cache, depth buffer, 16x16 rasterization-PE array (with its
// X/Y PE lines and broadcast register), pixel output buffer and division array.
//
// External interface (all synchronous to clk, active-low async reset):
//  * frame control: pulse start with tiles_x/tiles_y and the MLP parameters held
//    stable; done is high for one cycle after the last pixel of the frame left.
//  * hdr_*   : per tile, request {tile index = ty*tiles_x + tx} -> {list base, n}.
//  * lst_*   : read of one 32-bit list entry {cnt[3:0], id[27:0]}; responses come
//              back in request order.
//  * dep_*   : read of one FP16 depth at the same list address; the tag is
//              returned with the response (any order) and steers the write into
//              the depth buffer.
//  * feat_*  : Gaussian feature fetch on a feature-cache miss (one outstanding).
//  * pix_*   : normalised colours, four FP16 values per cycle; element e of tile
//              (pix_tx, pix_ty) is channel e%3 of pixel e/3 (row-major in the tile).
// Response channels have no backpressure. The hit/miss counters and the
// controller statistics are exported for evaluation.
//
// The block list and the sizes (16x16 PEs, 88 KB 4-way cache, 2x4 KB buffers,
// four dividers) follow the paper; the DRAM channel split and its handshakes are
// this design's own choice, since the paper only shows a single external memory.
module gs_accel_top
  import gs_pkg::*;
#(
  parameter int unsigned TW          = 8,     // tile-coordinate width
  parameter int unsigned CACHE_LINES = 4096,  // 88 KB / 22 B per Gaussian
  parameter int unsigned CACHE_WAYS  = 4,
  parameter int unsigned SUB         = 512,   // depth-buffer entries per bank
  parameter int unsigned NDIV        = 4
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic [TW-1:0] tiles_x,
  input  logic [TW-1:0] tiles_y,
  input  mlp_w_t        mlp_w,
  output logic          done,
  // tile headers
  output logic          hdr_req_valid,
  input  logic          hdr_req_ready,
  output logic [2*TW-1:0] hdr_req_tile,
  input  logic          hdr_rsp_valid,
  input  logic [31:0]   hdr_rsp_base,
  input  logic [15:0]   hdr_rsp_num,
  // Gaussian lists
  output logic          lst_req_valid,
  input  logic          lst_req_ready,
  output logic [31:0]   lst_req_addr,
  input  logic          lst_rsp_valid,
  input  gs_entry_t     lst_rsp_entry,
  // depths
  output logic          dep_req_valid,
  input  logic          dep_req_ready,
  output logic [31:0]   dep_req_addr,
  output logic [$clog2(SUB):0] dep_req_tag,
  input  logic          dep_rsp_valid,
  input  logic [$clog2(SUB):0] dep_rsp_tag,
  input  fp16_t         dep_rsp_d,
  // Gaussian features
  output logic          feat_req_valid,
  input  logic          feat_req_ready,
  output logic [GS_ID_W-1:0] feat_req_id,
  input  logic          feat_rsp_valid,
  input  gs_feat_t      feat_rsp,
  // pixels
  output logic          pix_valid,
  output logic [TW-1:0] pix_tx,
  output logic [TW-1:0] pix_ty,
  output logic [$clog2(3*NPIX)-1:0] pix_base,
  output fp16_t         pix_val [NDIV],
  // statistics
  output logic [31:0]   stat_hits,
  output logic [31:0]   stat_misses,
  output logic [31:0]   stat_tiles,
  output logic [31:0]   stat_subtiles,
  output logic [31:0]   stat_mlp_rows,
  output logic [31:0]   stat_gaussians,
  output logic [31:0]   stat_overlap_cycles,
  output logic [31:0]   stat_mode_switches,
  output logic [31:0]   stat_stall_cycles
);
  localparam int unsigned ROWS = (SUB / NPIX > 1) ? SUB / NPIX : 1;
  localparam int unsigned RW   = $clog2(ROWS > 1 ? ROWS : 2);
  localparam int unsigned IW   = $clog2(SUB);

  // coordinate generator
  logic          cg_start, cg_next, cg_valid, cg_last;
  logic [TW-1:0] cg_tx, cg_ty;
  fp16_t         x_coord [TILE];
  fp16_t         y_coord [TILE];

  coord_gen #(.TW(TW)) u_cg (
    .clk, .rst_n, .tiles_x, .tiles_y, .start(cg_start), .next(cg_next),
    .tile_valid(cg_valid), .tile_x(cg_tx), .tile_y(cg_ty), .last(cg_last),
    .x_coord, .y_coord
  );

  // feature cache
  logic      c_req_valid, c_req_ready, c_rsp_valid, c_hit, c_miss;
  gs_entry_t c_req_entry;
  gs_feat_t  c_rsp_feat;

  gs_feature_cache #(.LINES(CACHE_LINES), .WAYS(CACHE_WAYS)) u_cache (
    .clk, .rst_n, .inv(cg_start),
    .req_valid(c_req_valid), .req_ready(c_req_ready), .req_entry(c_req_entry),
    .rsp_valid(c_rsp_valid), .rsp_feat(c_rsp_feat),
    .mem_req_valid(feat_req_valid), .mem_req_ready(feat_req_ready), .mem_req_id(feat_req_id),
    .mem_rsp_valid(feat_rsp_valid), .mem_rsp_feat(feat_rsp),
    .hit(c_hit), .miss(c_miss)
  );

  // depth buffer
  logic          db_rd_valid, db_rd_bank, db_fw_valid, db_fw_bank, db_fr_bank;
  logic [RW-1:0] db_rd_row, db_fw_row;
  logic [IW-1:0] db_fr_idx;
  fp16_t         db_fr_f;
  fp16_t         d_row [NPIX];
  fp16_t         f_row [NPIX];

  depth_buffer #(.ENTRIES(SUB), .N(NPIX)) u_db (
    .clk,
    .wr_valid(dep_rsp_valid), .wr_bank(dep_rsp_tag[IW]), .wr_idx(dep_rsp_tag[IW-1:0]),
    .wr_d(dep_rsp_d),
    .rd_valid(db_rd_valid), .rd_bank(db_rd_bank), .rd_row(db_rd_row), .d_row,
    .fw_valid(db_fw_valid), .fw_bank(db_fw_bank), .fw_row(db_fw_row), .fw_data(f_row),
    .fr_bank(db_fr_bank), .fr_idx(db_fr_idx), .fr_f(db_fr_f)
  );

  // compute array
  pe_mode_t mode;
  logic     ld_w, mlp_valid, mlp_out_valid, gs_valid, array_busy, acc_clr, acc_ld;
  gs_feat_t gs;
  fp16_t    gs_f;
  pix_acc_t acc    [NPIX];
  pix_acc_t acc_in [NPIX];

  rpe_array #(.N(TILE)) u_array (
    .clk, .rst_n, .mode, .x_coord, .y_coord,
    .gs_valid, .gs, .gs_f, .busy(array_busy),
    .ld_w, .w(mlp_w), .mlp_valid, .mlp_d(d_row), .mlp_out_valid, .f_row,
    .acc_clr, .acc_ld, .acc_ld_val(acc_in), .acc
  );

  // pixel output buffer and division array
  logic            ob_wr_en, ob_bank, div_start, div_busy, div_busy_bank, div_rd_bank;
  logic [TW-1:0]   div_tx, div_ty;
  logic [$clog2(NPIX)-1:0] div_rd_pix [NDIV];
  pix_acc_t        div_rd_data [NDIV];

  pixel_output_buffer #(.N(NPIX), .NR(NDIV)) u_ob (
    .clk, .wr_en(ob_wr_en), .wr_bank(ob_bank), .wr_data(acc),
    .ld_bank(ob_bank), .ld_data(acc_in),
    .rd_bank(div_rd_bank), .rd_pix(div_rd_pix), .rd_data(div_rd_data)
  );

  div_array #(.N(NPIX), .NDIV(NDIV), .TW(TW)) u_div (
    .clk, .rst_n, .start(div_start), .start_bank(ob_bank), .start_tx(div_tx),
    .start_ty(div_ty), .busy(div_busy), .busy_bank(div_busy_bank),
    .rd_bank(div_rd_bank), .rd_pix(div_rd_pix), .rd_data(div_rd_data),
    .out_valid(pix_valid), .out_tx(pix_tx), .out_ty(pix_ty), .out_base(pix_base),
    .out_val(pix_val)
  );

  controller #(.SUB(SUB), .N(NPIX), .TW(TW)) u_ctrl (
    .clk, .rst_n, .start, .tiles_x, .done,
    .cg_start, .cg_next, .cg_valid, .cg_tx, .cg_ty,
    .hdr_req_valid, .hdr_req_ready, .hdr_req_tile, .hdr_rsp_valid, .hdr_rsp_base, .hdr_rsp_num,
    .lst_req_valid, .lst_req_ready, .lst_req_addr, .lst_rsp_valid, .lst_rsp_entry,
    .dep_req_valid, .dep_req_ready, .dep_req_addr, .dep_req_tag, .dep_rsp_valid,
    .cache_req_valid(c_req_valid), .cache_req_ready(c_req_ready), .cache_req_entry(c_req_entry),
    .cache_rsp_valid(c_rsp_valid), .cache_rsp_feat(c_rsp_feat),
    .db_rd_valid, .db_rd_bank, .db_rd_row, .db_fw_valid, .db_fw_bank, .db_fw_row,
    .db_fr_bank, .db_fr_idx, .db_fr_f,
    .mode, .ld_w, .mlp_valid, .mlp_out_valid, .gs_valid, .gs, .gs_f, .array_busy,
    .acc_clr, .acc_ld,
    .ob_wr_en, .ob_bank, .div_start, .div_tx, .div_ty, .div_busy, .div_busy_bank,
    .stat_tiles, .stat_subtiles, .stat_mlp_rows, .stat_gaussians, .stat_overlap_cycles,
    .stat_mode_switches, .stat_stall_cycles
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      stat_hits   <= '0;
      stat_misses <= '0;
    end else begin
      if (c_hit)  stat_hits   <= stat_hits + 1;
      if (c_miss) stat_misses <= stat_misses + 1;
    end
  end

  // the list of the last tile is marked by cg_last; a frame never ends mid-tile
  a_done_last: assert property (@(posedge clk) done |-> !cg_valid);
  logic unused_last;
  assign unused_last = cg_last;
endmodule
