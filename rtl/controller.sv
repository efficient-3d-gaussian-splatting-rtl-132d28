// Controller: sequences the accelerator over the tiles of a frame and, inside each
// tile, over subtiles, running the fine-grained interleaved pipeline of
// order-independent-transmittance rendering.
//
// Per tile (in the coordinate generator's order):
//  1. fetch the tile header {list base address, number of Gaussians n} from DRAM;
//  2. split the tile's Gaussian list into subtiles of at most SUB entries (the
//     capacity of one depth-buffer bank);
//  3. for subtile s: wait until its depths are in the depth buffer, spend one cycle
//     switching the array to MLP mode and loading the MLP parameters, stream the
//     bank's depth rows (256 per cycle) through the array and write F(d) back;
//  4. spend one cycle switching back to rasterization mode, clearing the pixel
//     accumulators (first subtile) or restoring them from the pixel output buffer
//     (later subtiles); start loading the depths of subtile s+1 into the other bank
//     (overlapped with rasterization); stream the subtile's Gaussians one per cycle:
//     list entry -> feature cache -> array, together with F(d) read from the depth
//     buffer; wait for the array to drain; save the accumulators to the tile's bank
//     of the pixel output buffer;
//  5. after the last subtile hand the bank to the division array and move on.
// The ordering (MLP of a subtile, then its rasterization while the next subtile's
// depths load) and the two single-cycle reconfiguration steps follow the paper.
// Saving and restoring the accumulators around MLP phases is this design's own
// choice: the PE reuses its accumulator registers as MLP adders, and the paper does
// not say how partial sums survive an MLP phase.
//
// DRAM is reached through simple request/response channels with no backpressure
// on responses: header (tile index -> base, n), list (address -> 32-bit entry, in
// order), depth (address + tag -> depth, tag returned, any order). The depth of
// list entry j is assumed to be stored at the same index j of a parallel depth
// array, so the same address serves both. Up to FIFO_DEPTH list reads are in
// flight; they are buffered in a FIFO in front of the feature cache.
module controller
  import gs_pkg::*;
#(
  parameter int unsigned SUB        = 512,
  parameter int unsigned N          = NPIX,
  parameter int unsigned TW         = 8,
  parameter int unsigned FIFO_DEPTH = 16
) (
  input  logic          clk,
  input  logic          rst_n,
  // frame control
  input  logic          start,
  input  logic [TW-1:0] tiles_x,
  output logic          done,
  // coordinate generator
  output logic          cg_start,
  output logic          cg_next,
  input  logic          cg_valid,
  input  logic [TW-1:0] cg_tx,
  input  logic [TW-1:0] cg_ty,
  // tile header channel
  output logic          hdr_req_valid,
  input  logic          hdr_req_ready,
  output logic [2*TW-1:0] hdr_req_tile,
  input  logic          hdr_rsp_valid,
  input  logic [31:0]   hdr_rsp_base,
  input  logic [15:0]   hdr_rsp_num,
  // list channel
  output logic          lst_req_valid,
  input  logic          lst_req_ready,
  output logic [31:0]   lst_req_addr,
  input  logic          lst_rsp_valid,
  input  gs_entry_t     lst_rsp_entry,
  // depth channel (responses are written into the depth buffer by the top level)
  output logic          dep_req_valid,
  input  logic          dep_req_ready,
  output logic [31:0]   dep_req_addr,
  output logic [$clog2(SUB):0] dep_req_tag,
  input  logic          dep_rsp_valid,
  // feature cache request side
  output logic          cache_req_valid,
  input  logic          cache_req_ready,
  output gs_entry_t     cache_req_entry,
  input  logic          cache_rsp_valid,
  input  gs_feat_t      cache_rsp_feat,
  // depth buffer MLP and F(d) ports
  output logic          db_rd_valid,
  output logic          db_rd_bank,
  output logic [$clog2(SUB/N > 1 ? SUB/N : 2)-1:0] db_rd_row,
  output logic          db_fw_valid,
  output logic          db_fw_bank,
  output logic [$clog2(SUB/N > 1 ? SUB/N : 2)-1:0] db_fw_row,
  output logic          db_fr_bank,
  output logic [$clog2(SUB)-1:0] db_fr_idx,
  input  fp16_t         db_fr_f,
  // compute unit
  output pe_mode_t      mode,
  output logic          ld_w,
  output logic          mlp_valid,
  input  logic          mlp_out_valid,
  output logic          gs_valid,
  output gs_feat_t      gs,
  output fp16_t         gs_f,
  input  logic          array_busy,
  output logic          acc_clr,
  output logic          acc_ld,
  // pixel output buffer and division array
  output logic          ob_wr_en,
  output logic          ob_bank,
  output logic          div_start,
  output logic [TW-1:0] div_tx,
  output logic [TW-1:0] div_ty,
  input  logic          div_busy,
  input  logic          div_busy_bank,
  // event counters
  output logic [31:0]   stat_tiles,
  output logic [31:0]   stat_subtiles,
  output logic [31:0]   stat_mlp_rows,
  output logic [31:0]   stat_gaussians,
  output logic [31:0]   stat_overlap_cycles,
  output logic [31:0]   stat_mode_switches,
  output logic [31:0]   stat_stall_cycles
);
  localparam int unsigned ROWS = (SUB / N > 1) ? SUB / N : 1;
  localparam int unsigned RW   = $clog2(ROWS > 1 ? ROWS : 2);
  localparam int unsigned IW   = $clog2(SUB);

  typedef enum logic [3:0] {
    S_IDLE, S_TILE, S_HDR, S_CLAIM, S_DWAIT, S_MCFG, S_MRUN, S_RCFG, S_RRUN,
    S_SAVE, S_DIV, S_FINISH
  } state_t;

  state_t st;
  logic [31:0] t_base;
  logic [15:0] t_num;
  logic [15:0] s_idx;            // current subtile
  logic [15:0] s_off;            // list offset of the current subtile
  logic [IW:0] s_cnt;            // Gaussians in the current subtile
  logic        db;               // depth-buffer bank of the current subtile

  // remaining entries after offset o, capped at SUB
  function automatic logic [IW:0] sub_cnt(input logic [15:0] num, input logic [15:0] o);
    logic [15:0] rem;
    rem = num - o;
    return (rem > 16'(SUB)) ? (IW+1)'(SUB) : (IW+1)'(rem);
  endfunction

  // ---------------- depth loader ----------------
  logic        ld_go, ld_bank;
  logic [31:0] ld_base;
  logic [IW:0] ld_cnt, ld_iss, ld_rcv;
  logic        ld_active, ld_done;
  assign ld_done       = (ld_rcv == ld_cnt);
  assign dep_req_valid = ld_active && (ld_iss < ld_cnt);
  assign dep_req_addr  = ld_base + 32'(ld_iss);
  assign dep_req_tag   = {ld_bank, IW'(ld_iss)};

  // ---------------- Gaussian streamer ----------------
  logic        sm_go;
  logic [31:0] sm_base;
  logic [IW:0] sm_iss, sm_out;
  logic [$clog2(FIFO_DEPTH):0] sm_credit, fifo_count;
  logic        fifo_empty, fifo_full;
  logic        sm_active;
  assign lst_req_valid = sm_active && (sm_iss < s_cnt) && (sm_credit < ($clog2(FIFO_DEPTH)+1)'(FIFO_DEPTH));
  assign lst_req_addr  = sm_base + 32'(sm_iss);
  assign cache_req_valid = !fifo_empty;

  sync_fifo #(.T(gs_entry_t), .DEPTH(FIFO_DEPTH)) u_fifo (
    .clk, .rst_n,
    .push(lst_rsp_valid), .din(lst_rsp_entry),
    .pop(cache_req_valid && cache_req_ready), .dout(cache_req_entry),
    .empty(fifo_empty), .full(fifo_full), .count(fifo_count)
  );

  // cache response is registered for one cycle to meet the F(d) read latency
  logic     gsv_r;
  gs_feat_t gsf_r;
  assign db_fr_bank = db;
  assign db_fr_idx  = IW'(sm_out);
  assign gs_valid   = gsv_r;
  assign gs         = gsf_r;
  assign gs_f       = db_fr_f;

  // ---------------- MLP row sequencing ----------------
  logic [RW:0]  m_iss, m_done, m_rows;
  logic [RW-1:0] m_row_pipe [1:MLP_LAT];
  logic          mlp_v_r;
  assign mlp_valid = mlp_v_r;
  logic [RW-1:0] m_row_d1;
  assign m_rows = (s_cnt == '0) ? '0 : (RW+1)'((s_cnt + (IW+1)'(N - 1)) / (IW+1)'(N));

  assign db_rd_valid = (st == S_MRUN) && (m_iss < m_rows);
  assign db_rd_bank  = db;
  assign db_rd_row   = RW'(m_iss);
  assign db_fw_valid = mlp_out_valid;
  assign db_fw_bank  = db;
  assign db_fw_row   = m_row_pipe[MLP_LAT];

  // ---------------- main sequencer ----------------
  assign mode          = (st == S_MCFG || st == S_MRUN) ? MODE_MLP : MODE_RASTER;
  assign ld_w          = (st == S_MCFG);
  assign acc_clr       = (st == S_RCFG) && (s_idx == 16'd0);
  assign acc_ld        = (st == S_RCFG) && (s_idx != 16'd0);
  assign ob_wr_en      = (st == S_SAVE);
  assign hdr_req_valid = (st == S_TILE) && cg_valid;
  assign hdr_req_tile  = (2*TW)'(cg_ty) * (2*TW)'(tiles_x) + (2*TW)'(cg_tx);
  assign cg_start      = (st == S_IDLE) && start;
  assign div_start     = (st == S_DIV) && !div_busy;
  assign div_tx        = cg_tx;
  assign div_ty        = cg_ty;
  assign cg_next       = div_start;
  assign done          = (st == S_FINISH) && !div_busy;

  assign ld_go = (st == S_CLAIM && !(div_busy && div_busy_bank == ob_bank)) ||
                 (st == S_RCFG && (s_off + 16'(s_cnt)) < t_num);
  assign sm_go = (st == S_RCFG);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; t_base <= '0; t_num <= '0; s_idx <= '0; s_off <= '0; s_cnt <= '0;
      db <= 1'b0; ob_bank <= 1'b0;
      ld_active <= 1'b0; ld_bank <= 1'b0; ld_base <= '0; ld_cnt <= '0; ld_iss <= '0; ld_rcv <= '0;
      sm_active <= 1'b0; sm_base <= '0; sm_iss <= '0; sm_out <= '0; sm_credit <= '0;
      gsv_r <= 1'b0; gsf_r <= '0;
      m_iss <= '0; m_done <= '0; m_row_d1 <= '0;
      for (int i = 1; i <= MLP_LAT; i++) m_row_pipe[i] <= '0;
      mlp_v_r <= 1'b0;
      stat_tiles <= '0; stat_subtiles <= '0; stat_mlp_rows <= '0; stat_gaussians <= '0;
      stat_overlap_cycles <= '0; stat_mode_switches <= '0; stat_stall_cycles <= '0;
    end else begin
      // reconfiguration cycles (raster->MLP and MLP->raster) and raster bubbles
      if (st == S_MCFG || st == S_RCFG) stat_mode_switches <= stat_mode_switches + 1;
      if (st == S_RRUN && sm_out < s_cnt && !gsv_r) stat_stall_cycles <= stat_stall_cycles + 1;
      // depth loader
      if (ld_go) begin
        ld_active <= 1'b1;
        ld_iss    <= '0;
        ld_rcv    <= '0;
        if (st == S_CLAIM) begin
          ld_bank <= db;  ld_base <= t_base;                   ld_cnt <= sub_cnt(t_num, 16'd0);
        end else begin
          ld_bank <= ~db; ld_base <= t_base + 32'(s_off) + 32'(s_cnt);
          ld_cnt  <= sub_cnt(t_num, s_off + 16'(s_cnt));
        end
      end else begin
        if (dep_req_valid && dep_req_ready) ld_iss <= ld_iss + 1'b1;
        if (dep_rsp_valid) ld_rcv <= ld_rcv + 1'b1;
      end
      if (ld_active && st == S_RRUN && dep_req_valid) stat_overlap_cycles <= stat_overlap_cycles + 1;

      // Gaussian streamer
      if (sm_go) begin
        sm_active <= 1'b1; sm_base <= t_base + 32'(s_off); sm_iss <= '0; sm_out <= '0;
      end else begin
        if (lst_req_valid && lst_req_ready) sm_iss <= sm_iss + 1'b1;
        if (cache_rsp_valid) sm_out <= sm_out + 1'b1;
        if (st == S_SAVE) sm_active <= 1'b0;
      end
      sm_credit <= sm_credit + (($clog2(FIFO_DEPTH)+1)'(lst_req_valid && lst_req_ready))
                             - (($clog2(FIFO_DEPTH)+1)'(cache_req_valid && cache_req_ready));
      gsv_r <= cache_rsp_valid;
      gsf_r <= cache_rsp_feat;
      if (cache_rsp_valid) stat_gaussians <= stat_gaussians + 1;

      // MLP rows: row read issued in cycle t, array input t+1, F(d) at t+1+MLP_LAT;
      // m_row_pipe[k] holds the row issued at t during cycle t+1+k
      m_row_d1 <= RW'(m_iss);
      m_row_pipe[1] <= m_row_d1;
      for (int i = 2; i <= MLP_LAT; i++) m_row_pipe[i] <= m_row_pipe[i-1];
      mlp_v_r <= db_rd_valid;
      if (db_rd_valid) m_iss <= m_iss + 1'b1;
      if (mlp_out_valid) begin
        m_done <= m_done + 1'b1;
        stat_mlp_rows <= stat_mlp_rows + 1;
      end

      case (st)
        S_IDLE:  if (start) st <= S_TILE;
        S_TILE:  if (!cg_valid) st <= S_FINISH;
                 else if (hdr_req_ready) st <= S_HDR;
        S_HDR:   if (hdr_rsp_valid) begin
          t_base <= hdr_rsp_base;
          t_num  <= hdr_rsp_num;
          s_idx  <= '0;
          s_off  <= '0;
          s_cnt  <= sub_cnt(hdr_rsp_num, 16'd0);
          st     <= S_CLAIM;
        end
        S_CLAIM: if (ld_go) st <= S_DWAIT;
        S_DWAIT: if (ld_done && !ld_go) begin
          ld_active <= 1'b0;
          m_iss <= '0; m_done <= '0;
          st <= S_MCFG;
        end
        S_MCFG:  st <= S_MRUN;
        S_MRUN:  if (m_done == m_rows) st <= S_RCFG;
        S_RCFG:  st <= S_RRUN;
        S_RRUN:  if (sm_out == s_cnt && !gsv_r && !array_busy) st <= S_SAVE;
        S_SAVE: begin
          stat_subtiles <= stat_subtiles + 1;
          if (s_off + 16'(s_cnt) < t_num) begin
            s_idx <= s_idx + 1'b1;
            s_off <= s_off + 16'(s_cnt);
            s_cnt <= sub_cnt(t_num, s_off + 16'(s_cnt));
            db    <= ~db;
            st    <= S_DWAIT;
          end else begin
            st <= S_DIV;
          end
        end
        S_DIV: if (!div_busy) begin
          ob_bank    <= ~ob_bank;
          stat_tiles <= stat_tiles + 1;
          st         <= S_TILE;
        end
        S_FINISH: if (!div_busy) st <= S_IDLE;
        default: st <= S_IDLE;
      endcase
    end
  end

  // the list FIFO never overflows thanks to the credit counter
  a_fifo_credit: assert property (@(posedge clk) lst_rsp_valid |-> !fifo_full);
  a_fifo_count:  assert property (@(posedge clk) fifo_count <= ($clog2(FIFO_DEPTH)+1)'(FIFO_DEPTH));
endmodule
