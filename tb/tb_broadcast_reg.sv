// Self-checking test of broadcast_reg: reset, loading the ten MLP parameters,
// loading the five rasterization units while the others hold, and holding when
// neither load is asserted.
module tb_broadcast_reg;
  import gs_pkg::*;
  logic clk = 0, rst_n = 0, ld_w = 0, ld_ras = 0;
  mlp_w_t w;
  fp16_t r_i, g_i, b_i, f_i1, o_i2;
  breg_t q;
  int checks = 0, failures = 0;

  broadcast_reg dut (.*);
  always #5 clk = ~clk;

  task automatic expect_q(input breg_t e, input string what);
    checks++;
    if (q !== e) begin
      failures++;
      $display("%s: q=%h expected %h", what, q, e);
    end
  endtask

  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    breg_t e;
    w = '0; {r_i, g_i, b_i, f_i1, o_i2} = '0;
    @(posedge clk); #1;
    expect_q('0, "reset");
    rst_n = 1;
    for (int t = 0; t < 50; t++) begin
      w = {$urandom, $urandom, $urandom, $urandom, $urandom};
      ld_w = 1; @(posedge clk); #1; ld_w = 0;
      e = '{u_w1_r: w.w1, u_w2_g: w.w2, u_w3_b: w.w3, u_w6_f: w.w6, u_w5_o: w.w5,
            u_w4: w.w4, u_b1: w.b1, u_b2: w.b2, u_b3: w.b3, u_b4: w.b4};
      expect_q(e, "load weights");
      {r_i, g_i, b_i, f_i1, o_i2} = {$urandom, $urandom, 16'($urandom)};
      ld_ras = 1; @(posedge clk); #1; ld_ras = 0;
      e.u_w1_r = r_i; e.u_w2_g = g_i; e.u_w3_b = b_i; e.u_w6_f = f_i1; e.u_w5_o = o_i2;
      expect_q(e, "load raster units");
      r_i = ~r_i;
      @(posedge clk); #1;
      expect_q(e, "hold");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
