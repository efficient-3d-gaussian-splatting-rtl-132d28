// Compute unit: 16x16 reconfigurable PEs, the X-PE and Y-PE lines, and one
// broadcast register per PE row.
//
// Rasterization mode (axis-shared rasterization): one Gaussian enters per cycle on
// gs_valid/gs/gs_f (its features and its decay factor F(d)). In its entry cycle T
// the X-PE line starts on it; the Y-PE line starts one cycle later, so that x-term
// and y-term reach every PE in cycle T+2, the x^2-term in T+3 and the y^2-term in
// T+4. PE (row r, column k) computes pixel (x_coord[k], y_coord[r]); it takes its
// x-terms from X-PE k (broadcast down the column) and its y-terms from Y-PE r
// (broadcast along the row). Each row's broadcast register is reloaded every cycle
// with o of the Gaussian due at the opacity stage (T+6), F(d) of the one due at
// the F stage (T+7) and the colour of the one due at the blending stage (T+8).
// The contribution of a Gaussian entering in cycle T is in the accumulators after
// cycle T+9 (RAS_LAT = 10 cycles); busy stays high while one is in flight.
//
// MLP mode: ld_w copies the ten MLP parameters into all broadcast registers; then
// each cycle with mlp_valid applies 256 depths (one per PE) and mlp_out_valid
// marks the 256 F(d) on f_row MLP_LAT = 6 cycles later.
//
// Following the paper, all sixteen broadcast registers hold the same values; one
// register per row limits the fan-out to sixteen PEs. The skew of opacity, F(d) and
// colour over three consecutive Gaussians is read from the paper's broadcast
// register labels (o_{i+2}, F(d_{i+1}), R_i).
module rpe_array
  import gs_pkg::*;
#(
  parameter int unsigned N = TILE
) (
  input  logic     clk,
  input  logic     rst_n,
  input  pe_mode_t mode,
  // pixel coordinates of the current tile (from the coordinate generator)
  input  fp16_t    x_coord [N],
  input  fp16_t    y_coord [N],
  // rasterization stream
  input  logic     gs_valid,
  input  gs_feat_t gs,
  input  fp16_t    gs_f,
  output logic     busy,
  // MLP parameters and depth rows
  input  logic     ld_w,
  input  mlp_w_t   w,
  input  logic     mlp_valid,
  input  fp16_t    mlp_d [N*N],
  output logic     mlp_out_valid,
  output fp16_t    f_row [N*N],
  // accumulators, pixel p = row*N + column
  input  logic     acc_clr,
  input  logic     acc_ld,
  input  pix_acc_t acc_ld_val [N*N],
  output pix_acc_t acc [N*N]
);
  localparam int unsigned DL = 8;    // feature delay line length

  gs_feat_t gs_d [1:DL];
  fp16_t    f_d  [1:DL];
  logic [RAS_LAT:1] v_d;
  logic [MLP_LAT:1] m_d;

  always_ff @(posedge clk) begin
    gs_d[1] <= gs;
    f_d[1]  <= gs_f;
    for (int i = 2; i <= DL; i++) begin
      gs_d[i] <= gs_d[i-1];
      f_d[i]  <= f_d[i-1];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v_d <= '0;
      m_d <= '0;
    end else begin
      v_d <= {v_d[RAS_LAT-1:1], gs_valid & (mode == MODE_RASTER)};
      m_d <= {m_d[MLP_LAT-1:1], mlp_valid & (mode == MODE_MLP)};
    end
  end

  assign busy          = |v_d;
  assign mlp_out_valid = m_d[MLP_LAT];

  fp16_t x_term [N], x2_term [N], y_term [N], y2_term [N];

  x_pe_line #(.N(N)) u_xline (
    .clk, .x_coord, .mu_x(gs.mu_x), .c(gs.c), .na(gs.na),
    .x_term, .x2_term
  );
  y_pe_line #(.N(N)) u_yline (
    .clk, .y_coord, .mu_y(gs_d[1].mu_y), .nb(gs_d[1].nb),
    .y_term, .y2_term
  );

  for (genvar r = 0; r < N; r++) begin : g_row
    breg_t breg;
    broadcast_reg u_breg (
      .clk, .rst_n,
      .ld_w, .w,
      .ld_ras(mode == MODE_RASTER),
      .r_i(gs_d[7].r), .g_i(gs_d[7].g), .b_i(gs_d[7].b),
      .f_i1(f_d[6]),
      .o_i2(gs_d[5].o),
      .q(breg)
    );
    for (genvar k = 0; k < N; k++) begin : g_col
      rpe u_pe (
        .clk, .rst_n, .mode,
        .v_in(v_d[2]),
        .x_term(x_term[k]), .y_term(y_term[r]),
        .x2_term(x2_term[k]), .y2_term(y2_term[r]),
        .breg,
        .d_in(mlp_d[r*N+k]),
        .acc_clr, .acc_ld, .acc_ld_val(acc_ld_val[r*N+k]),
        .acc(acc[r*N+k]),
        .f_out(f_row[r*N+k])
      );
    end
  end
endmodule
