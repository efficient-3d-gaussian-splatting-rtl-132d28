// Self-checking test of x_pe_line: streams one random Gaussian per cycle and checks
// every X-PE's x-term (two cycles later) and x^2-term (three cycles later) against
// the same operations done in real arithmetic and rounded to FP16 after each step.
module tb_x_pe_line;
  import gs_pkg::*;
  import fp16_ref_pkg::*;
  localparam int N = 16;
  localparam int NG = 400;
  logic clk = 0;
  fp16_t x_coord [N];
  fp16_t mu_x, c, na;
  fp16_t x_term [N], x2_term [N];
  fp16_t g_mu [NG], g_c [NG], g_na [NG];
  int checks = 0, failures = 0, cyc = 0;

  x_pe_line #(.N(N)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int k = 0; k < N; k++) x_coord[k] = to_fp16(real'(160 + k));
    for (int i = 0; i < NG; i++) begin
      g_mu[i] = to_fp16(150.0 + real'($urandom % 4000) / 100.0);
      g_c[i]  = rand_fp16(8, 16);
      g_na[i] = rand_fp16(8, 16);
    end
    for (int i = 0; i < NG + 3; i++) begin
      if (i < NG) begin mu_x = g_mu[i]; c = g_c[i]; na = g_na[i]; end
      @(posedge clk); #1;
      // after edge i+1: x-term of Gaussian i-1, x^2-term of Gaussian i-2
      for (int k = 0; k < N; k++) begin
        fp16_t dx, et, e2;
        if (i >= 1 && i - 1 < NG) begin
          dx = to_fp16(to_real(x_coord[k]) - to_real(g_mu[i-1]));
          et = to_fp16(to_real(g_c[i-1]) * to_real(dx));
          checks++;
          if (!fp_eq(x_term[k], et)) begin
            failures++;
            if (failures < 10) $display("g%0d k%0d x-term %h exp %h", i-1, k, x_term[k], et);
          end
        end
        if (i >= 2 && i - 2 < NG) begin
          dx = to_fp16(to_real(x_coord[k]) - to_real(g_mu[i-2]));
          e2 = to_fp16(to_real(g_na[i-2]) * to_real(to_fp16(to_real(dx) * to_real(dx))));
          checks++;
          if (!fp_eq(x2_term[k], e2)) begin
            failures++;
            if (failures < 10) $display("g%0d k%0d x2-term %h exp %h", i-2, k, x2_term[k], e2);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
