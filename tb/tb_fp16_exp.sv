// Self-checking test of fp16_exp against the real exponential rounded to FP16.
// The unit is specified to within one ulp; inputs sweep the whole range in which
// the result is a normal FP16 number, plus the saturating ends and zero.
module tb_fp16_exp;
  import fp16_ref_pkg::*;
  logic [15:0] x, y, exp_y;
  int checks = 0, failures = 0;
  fp16_exp dut (.x(x), .y(y));

  task automatic check(input logic [15:0] tx);
    real r;
    x = tx;
    #1;
    r = to_real(tx);
    exp_y = to_fp16($exp(r));
    checks++;
    if (ulp_dist(y, exp_y) > 1) begin
      failures++;
      if (failures < 10) $display("exp(%h=%f) = %h expected %h", tx, r, y, exp_y);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 4000; i++) begin
      logic [15:0] v;
      v = rand_fp16(1, 18);
      if (to_real(v) < 11.0 && to_real(v) > -9.6) check(v);
    end
    for (int k = -960; k <= 1100; k += 7) check(to_fp16(real'(k) / 100.0));
    check(16'h0000);                       // e^0 = 1
    check(16'hCC00);                       // e^-16 -> 0 (flushed)
    check(16'h4C00);                       // e^16 -> inf
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
