// Self-checking test of fp16_mul against real arithmetic rounded to FP16: random operands, underflow and overflow.
module tb_fp16_mul;
  import fp16_ref_pkg::*;
  logic [15:0] a, b, y, exp_y;
  int checks = 0, failures = 0;
  fp16_mul dut (.a(a), .b(b), .y(y));

  task automatic check(input logic [15:0] ta, input logic [15:0] tb_);
    a = ta; b = tb_;
    #1;
    exp_y = to_fp16(to_real(ta) * to_real(tb_));
    checks++;
    if (y !== exp_y && !(y[14:0] == 0 && exp_y[14:0] == 0)) begin
      failures++;
      if (failures < 10) $display("mul %h * %h = %h expected %h", ta, tb_, y, exp_y);
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
    check(16'h7BFF, 16'h7BFF);            // overflow
    check(16'h0400, 16'h0400);            // underflow
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
