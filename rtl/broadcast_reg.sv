// Broadcast register (B-reg) of one PE row: ten FP16 units whose outputs fan out
// to the sixteen reconfigurable PEs of the row.
//
// In MLP mode all ten units hold the decay-factor network's parameters
// (w1..w6, b1..b4). In rasterization mode five units are used: colour R,G,B of
// Gaussian i, F(d) of Gaussian i+1 and opacity o of Gaussian i+2, loaded each cycle
// so that every PE pipeline stage sees the value of the Gaussian it is working on.
// Loading is synchronous: ld_w replaces all ten units, ld_ras replaces the five
// rasterization units; the new values are visible one cycle later.
module broadcast_reg
  import gs_pkg::*;
(
  input  logic   clk,
  input  logic   rst_n,
  input  logic   ld_w,      // load MLP parameters
  input  mlp_w_t w,
  input  logic   ld_ras,    // load rasterization operands
  input  fp16_t  r_i, g_i, b_i,   // colour of the Gaussian at the blending stage
  input  fp16_t  f_i1,            // F(d) of the next Gaussian
  input  fp16_t  o_i2,            // opacity of the Gaussian after that
  output breg_t  q
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) q <= '0;
    else if (ld_w) begin
      q.u_w1_r <= w.w1; q.u_w2_g <= w.w2; q.u_w3_b <= w.w3;
      q.u_w4   <= w.w4; q.u_w5_o <= w.w5; q.u_w6_f <= w.w6;
      q.u_b1   <= w.b1; q.u_b2   <= w.b2; q.u_b3   <= w.b3; q.u_b4 <= w.b4;
    end else if (ld_ras) begin
      q.u_w1_r <= r_i; q.u_w2_g <= g_i; q.u_w3_b <= b_i;
      q.u_w6_f <= f_i1;
      q.u_w5_o <= o_i2;
    end
  end
endmodule
