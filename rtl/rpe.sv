// Reconfigurable PE (RPE): one pixel of the 16x16 array. Six FP16 multipliers, six
// FP16 adders and one exponential unit, every one followed by a register, with
// multiplexers that select between two datapaths.
//
// Rasterization mode (mode = MODE_RASTER), one Gaussian per cycle, v_in marks a
// real Gaussian in cycle 0 when x-term and y-term arrive:
//   c0  M-1 = x-term * y-term
//   c1  A-1 = M-1 + x^2-term          (x^2-term arrives in c1)
//   c2  A-2 = A-1 + y^2-term          (y^2-term arrives in c2): exponent of alpha
//   c3  E   = exp(A-2)
//   c4  M-2 = E * o                   alpha, o from the broadcast register
//   c5  M-3 = alpha * F(d)            F(d) from the broadcast register
//   c6  A-3 += M-3                    denominator of the blended colour
//       M-4-k = M-3 * {R,G,B}         colour from the broadcast register
//   c7  A-4-k += M-4-k                numerators
// Accumulation happens only for valid Gaussians; other stages run freely.
//
// MLP mode (mode = MODE_MLP), one depth d per cycle:
//   c0  M-4-k = d * w_k               k = 1..3
//   c1  A-4-k = M-4-k + b_k
//   c2  h_k = LeakyReLU(A-4-k); M-1 = h1*w4, M-2 = h2*w5, M-3 = h3*w6
//   c3  A-1 = M-1 + M-2, A-3 = M-3 + b4
//   c4  A-2 = A-1 + A-3
//   c5  E = exp(A-2)                  F(d) on f_out from c6
// The multiplexer inputs follow the paper's PE drawing; the Leaky ReLU sits on the
// A-4-k register outputs where they feed M-1..M-3.
//
// MLP mode reuses the accumulator registers A-3 and A-4-k. acc_clr zeroes them and
// acc_ld loads them (this design saves them to the pixel output buffer before MLP
// mode and restores them afterwards); acc_ld takes priority over accumulation.
module rpe
  import gs_pkg::*;
(
  input  logic     clk,
  input  logic     rst_n,
  input  pe_mode_t mode,
  input  logic     v_in,
  input  fp16_t    x_term,
  input  fp16_t    y_term,
  input  fp16_t    x2_term,
  input  fp16_t    y2_term,
  input  breg_t    breg,
  input  fp16_t    d_in,
  input  logic     acc_clr,
  input  logic     acc_ld,
  input  pix_acc_t acc_ld_val,
  output pix_acc_t acc,
  output fp16_t    f_out
);
  logic  mlp;
  fp16_t m1_r, m2_r, m3_r, a1_r, a2_r, a3_r, e_r;
  fp16_t m4_r [3];
  fp16_t a4_r [3];
  fp16_t h    [3];
  fp16_t m1_a, m1_b, m2_a, m2_b, m3_a, m3_b, a1_b, a2_b, a3_a;
  fp16_t m1, m2, m3, a1, a2, a3, e;
  fp16_t m4_a, m4_b [3], a4_a [3];
  fp16_t m4 [3], a4 [3];
  logic [7:1] v;   // v[k]: the register written in cycle k-1 holds a valid Gaussian

  assign mlp = (mode == MODE_MLP);

  for (genvar k = 0; k < 3; k++) begin : g_lrelu
    leaky_relu u_lr (.x(a4_r[k]), .y(h[k]));
  end

  // input multiplexers
  always_comb begin
    m1_a = mlp ? breg.u_w4   : x_term;
    m1_b = mlp ? h[0]        : y_term;
    m2_a = mlp ? h[1]        : e_r;
    m2_b = breg.u_w5_o;                       // o_i / w5
    m3_a = mlp ? h[2]        : m2_r;
    m3_b = breg.u_w6_f;                       // F(d_i) / w6
    a1_b = mlp ? m2_r        : x2_term;
    a2_b = mlp ? a3_r        : y2_term;
    a3_a = mlp ? breg.u_b4   : a3_r;
    m4_a = mlp ? d_in        : m3_r;
    m4_b[0] = breg.u_w1_r;
    m4_b[1] = breg.u_w2_g;
    m4_b[2] = breg.u_w3_b;
    a4_a[0] = mlp ? breg.u_b1 : a4_r[0];
    a4_a[1] = mlp ? breg.u_b2 : a4_r[1];
    a4_a[2] = mlp ? breg.u_b3 : a4_r[2];
  end

  fp16_mul u_m1 (.a(m1_a), .b(m1_b), .y(m1));
  fp16_mul u_m2 (.a(m2_a), .b(m2_b), .y(m2));
  fp16_mul u_m3 (.a(m3_a), .b(m3_b), .y(m3));
  fp16_add u_a1 (.a(m1_r), .b(a1_b), .y(a1));
  fp16_add u_a2 (.a(a1_r), .b(a2_b), .y(a2));
  fp16_add u_a3 (.a(a3_a), .b(m3_r), .y(a3));
  fp16_exp u_e  (.x(a2_r), .y(e));
  for (genvar k = 0; k < 3; k++) begin : g_grp4
    fp16_mul u_m4 (.a(m4_a), .b(m4_b[k]), .y(m4[k]));
    fp16_add u_a4 (.a(a4_a[k]), .b(m4_r[k]), .y(a4[k]));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) v <= '0;
    else        v <= mlp ? '0 : {v[6:1], v_in};
  end

  always_ff @(posedge clk) begin
    m1_r <= m1;
    m2_r <= m2;
    m3_r <= m3;
    a1_r <= a1;
    a2_r <= a2;
    e_r  <= e;
    for (int k = 0; k < 3; k++) m4_r[k] <= m4[k];
    if (acc_clr) begin
      a3_r <= FP16_ZERO;
      for (int k = 0; k < 3; k++) a4_r[k] <= FP16_ZERO;
    end else if (acc_ld) begin
      a3_r    <= acc_ld_val.den;
      a4_r[0] <= acc_ld_val.r;
      a4_r[1] <= acc_ld_val.g;
      a4_r[2] <= acc_ld_val.b;
    end else begin
      if (mlp || v[6]) a3_r <= a3;
      if (mlp || v[7]) for (int k = 0; k < 3; k++) a4_r[k] <= a4[k];
    end
  end

  assign acc   = '{den: a3_r, r: a4_r[0], g: a4_r[1], b: a4_r[2]};
  assign f_out = e_r;
endmodule
