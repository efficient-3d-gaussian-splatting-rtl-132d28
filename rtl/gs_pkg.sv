// Shared types and constants of the Gaussian-splatting rasterizer.
//
// Every arithmetic value on chip is an IEEE-754 binary16 (FP16) number. A projected
// Gaussian is carried as nine FP16 features (mean, pre-scaled conic, opacity, colour),
// which is the 9-parameter record the feature cache stores. The MLP that replaces
// depth sorting has ten parameters (w1..w6, b1..b4), held in the ten units of the
// per-row broadcast register. Tile lists hold 32-bit entries made of a 4-bit count of
// the tiles a Gaussian touches and its 28-bit ID.
package gs_pkg;

  typedef logic [15:0] fp16_t;

  localparam fp16_t FP16_ZERO = 16'h0000;
  localparam fp16_t FP16_ONE  = 16'h3C00;
  localparam fp16_t FP16_INF  = 16'h7C00;
  localparam fp16_t FP16_NAN  = 16'h7E00;

  localparam int unsigned TILE      = 16;  // tile edge in pixels, also the PE array edge
  localparam int unsigned NPIX      = TILE * TILE;
  localparam int unsigned GS_ID_W   = 28;
  localparam int unsigned GS_CNT_W  = 4;

  // Projected Gaussian as stored in the feature cache and broadcast to the array.
  // na = -a/2, nb = -b/2 and c are the conic entries, so that the exponent of
  // alpha is  c*dx*dy + na*dx^2 + nb*dy^2  with dx = x - mu_x, dy = y - mu_y.
  typedef struct packed {
    fp16_t mu_x;
    fp16_t mu_y;
    fp16_t na;
    fp16_t nb;
    fp16_t c;
    fp16_t o;
    fp16_t r;
    fp16_t g;
    fp16_t b;
  } gs_feat_t;

  // 32-bit tile-list entry: tiles the Gaussian intersects, then its ID.
  typedef struct packed {
    logic [GS_CNT_W-1:0] cnt;
    logic [GS_ID_W-1:0]  id;
  } gs_entry_t;

  // Inference-time MLP: h_k = LeakyReLU(w_k*d + b_k), k = 1..3,
  // F(d) = exp(w4*h1 + w5*h2 + w6*h3 + b4).
  typedef struct packed {
    fp16_t w1, w2, w3, w4, w5, w6;
    fp16_t b1, b2, b3, b4;
  } mlp_w_t;

  // The ten broadcast-register units. Each unit has a rasterization meaning and an
  // MLP meaning; in rasterization mode the colour, F(d) and opacity units hold three
  // consecutive Gaussians (i, i+1, i+2) because the PE consumes them in consecutive
  // pipeline stages.
  typedef struct packed {
    fp16_t u_w1_r;   // w1 / R_i
    fp16_t u_w2_g;   // w2 / G_i
    fp16_t u_w3_b;   // w3 / B_i
    fp16_t u_w6_f;   // w6 / F(d_{i+1})
    fp16_t u_w5_o;   // w5 / o_{i+2}
    fp16_t u_w4;
    fp16_t u_b1;
    fp16_t u_b2;
    fp16_t u_b3;
    fp16_t u_b4;
  } breg_t;

  typedef enum logic {MODE_RASTER = 1'b0, MODE_MLP = 1'b1} pe_mode_t;

  // Per-pixel accumulators: denominator sum(F*alpha) and the three numerators.
  typedef struct packed {
    fp16_t den;
    fp16_t r;
    fp16_t g;
    fp16_t b;
  } pix_acc_t;

  // Pipeline latencies of the compute unit, in clock cycles.
  // MLP: depth in at cycle 0, F(d) registered out at cycle 6.
  localparam int unsigned MLP_LAT = 6;
  // Rasterization: Gaussian enters the X-PE line at cycle 0, the colour
  // accumulators hold its contribution after cycle 10.
  localparam int unsigned RAS_LAT = 10;

  // Unsigned integer (pixel coordinate) to FP16, round to nearest even.
  function automatic fp16_t uint_to_fp16(input logic [15:0] v);
    logic [15:0] m;
    int unsigned msb;
    logic [4:0] e;
    logic [10:0] mant;
    logic g, s, lsb;
    logic [11:0] rounded;
    if (v == 16'd0) return FP16_ZERO;
    msb = 0;
    for (int i = 0; i < 16; i++) if (v[i]) msb = i;
    m = v << (15 - msb);             // leading one now at bit 15
    mant = m[15:5];
    g    = m[4];
    s    = |m[3:0];
    lsb  = m[5];
    rounded = {1'b0, mant} + {11'd0, (g & (s | lsb))};
    e = 5'(msb + 15);
    if (rounded[11]) begin
      e = e + 5'd1;
      rounded = rounded >> 1;
    end
    return {1'b0, e, rounded[9:0]};
  endfunction

endpackage
