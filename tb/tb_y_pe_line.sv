// Self-checking test of y_pe_line: streams one random Gaussian per cycle and checks
// every Y-PE's y-term (one cycle later) and y^2-term (three cycles later) against
// real arithmetic rounded to FP16 after each step.
module tb_y_pe_line;
  import gs_pkg::*;
  import fp16_ref_pkg::*;
  localparam int N = 16;
  localparam int NG = 400;
  logic clk = 0;
  fp16_t y_coord [N];
  fp16_t mu_y, nb;
  fp16_t y_term [N], y2_term [N];
  fp16_t g_mu [NG], g_nb [NG];
  int checks = 0, failures = 0;

  y_pe_line #(.N(N)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int k = 0; k < N; k++) y_coord[k] = to_fp16(real'(32 + k));
    for (int i = 0; i < NG; i++) begin
      g_mu[i] = to_fp16(20.0 + real'($urandom % 4000) / 100.0);
      g_nb[i] = rand_fp16(8, 16);
    end
    for (int i = 0; i < NG + 3; i++) begin
      if (i < NG) begin mu_y = g_mu[i]; nb = g_nb[i]; end
      @(posedge clk); #1;
      for (int k = 0; k < N; k++) begin
        fp16_t dy, e2;
        if (i < NG) begin
          dy = to_fp16(to_real(y_coord[k]) - to_real(g_mu[i]));
          checks++;
          if (!fp_eq(y_term[k], dy)) begin
            failures++;
            if (failures < 10) $display("g%0d k%0d y-term %h exp %h", i, k, y_term[k], dy);
          end
        end
        if (i >= 2 && i - 2 < NG) begin
          dy = to_fp16(to_real(y_coord[k]) - to_real(g_mu[i-2]));
          e2 = to_fp16(to_real(g_nb[i-2]) * to_real(to_fp16(to_real(dy) * to_real(dy))));
          checks++;
          if (!fp_eq(y2_term[k], e2)) begin
            failures++;
            if (failures < 10) $display("g%0d k%0d y2-term %h exp %h", i-2, k, y2_term[k], e2);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
