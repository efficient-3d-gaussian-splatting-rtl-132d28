// Depth buffer (4 KB): holds the depths d of the Gaussians of one subtile and their
// decay factors F(d), in two banks so that the depths of the next subtile can be
// loaded from DRAM while the array rasterizes the current one (fine-grained
// interleaved pipeline).
//
// Each bank has ENTRIES depth slots and ENTRIES F(d) slots, FP16; with the default
// 512 entries the two banks hold 2 x 512 x (2 + 2) bytes = 4 KB, the paper's size.
// The split into two banks of 512 is this design's reading of the paper's
// overlapped load; the paper gives only the total. Ports:
//  * wr_*: one depth per cycle from DRAM into (bank, index);
//  * rd_*: one row of N = 256 depths per cycle to the PE array in MLP mode,
//    d_row valid the cycle after rd_valid (high on-chip bandwidth, as the paper
//    requires);
//  * fw_*: one row of 256 F(d) written back from the array;
//  * fr_*: one F(d) per cycle for rasterization, fr_f valid the cycle after fr_idx.
module depth_buffer
  import gs_pkg::*;
#(
  parameter int unsigned ENTRIES = 512,
  parameter int unsigned N       = NPIX
) (
  input  logic  clk,
  input  logic  wr_valid,
  input  logic  wr_bank,
  input  logic [$clog2(ENTRIES)-1:0] wr_idx,
  input  fp16_t wr_d,
  input  logic  rd_valid,
  input  logic  rd_bank,
  input  logic [$clog2(ENTRIES/N > 1 ? ENTRIES/N : 2)-1:0] rd_row,
  output fp16_t d_row [N],
  input  logic  fw_valid,
  input  logic  fw_bank,
  input  logic [$clog2(ENTRIES/N > 1 ? ENTRIES/N : 2)-1:0] fw_row,
  input  fp16_t fw_data [N],
  input  logic  fr_bank,
  input  logic [$clog2(ENTRIES)-1:0] fr_idx,
  output fp16_t fr_f
);
  localparam int unsigned ROWS = ENTRIES / N;
  localparam int unsigned RW   = $clog2(ROWS > 1 ? ROWS : 2);
  localparam int unsigned NW   = $clog2(N);

  // one row of N entries per word, 2*ROWS words per array
  fp16_t d_mem [2*ROWS][N];
  fp16_t f_mem [2*ROWS][N];

  logic [RW:0] wr_word, rd_word, fw_word, fr_word;
  assign wr_word = {wr_bank, RW'(wr_idx >> NW)};
  assign rd_word = {rd_bank, RW'(rd_row)};
  assign fw_word = {fw_bank, RW'(fw_row)};
  assign fr_word = {fr_bank, RW'(fr_idx >> NW)};

  always_ff @(posedge clk) begin
    if (wr_valid) d_mem[wr_word][wr_idx[NW-1:0]] <= wr_d;
    if (rd_valid) d_row <= d_mem[rd_word];
    if (fw_valid) f_mem[fw_word] <= fw_data;
    fr_f <= f_mem[fr_word][fr_idx[NW-1:0]];
  end
endmodule
