// Self-checking test of fp16_add against real arithmetic rounded to FP16.
// Covers random operands of close and far exponents (both signs, so true
// subtraction and cancellation), exact cancellation, and overflow to infinity.
module tb_fp16_add;
  import fp16_ref_pkg::*;
  logic [15:0] a, b, y, exp_y;
  int checks = 0, failures = 0;
  fp16_add dut (.a(a), .b(b), .y(y));

  task automatic check(input logic [15:0] ta, input logic [15:0] tb_);
    a = ta; b = tb_;
    #1;
    exp_y = to_fp16(to_real(ta) + to_real(tb_));
    checks++;
    if (y !== exp_y && !(y[14:0] == 0 && exp_y[14:0] == 0)) begin
      failures++;
      if (failures < 10) $display("add %h + %h = %h expected %h", ta, tb_, y, exp_y);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 4000; i++) check(rand_fp16(10, 20), rand_fp16(10, 20));
    for (int i = 0; i < 2000; i++) check(rand_fp16(1, 29), rand_fp16(1, 29));
    for (int i = 0; i < 500; i++) begin
      logic [15:0] v;
      v = rand_fp16(5, 25);
      check(v, {~v[15], v[14:0]});        // exact cancellation
    end
    check(16'h7BFF, 16'h7BFF);            // overflow
    check(16'h3C00, 16'h3C00);            // 1 + 1 = 2
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
