// Self-checking test of leaky_relu: negative normal inputs must equal x/8 computed
// in real arithmetic, everything else must pass unchanged.
module tb_leaky_relu;
  import fp16_ref_pkg::*;
  logic [15:0] x, y, exp_y;
  int checks = 0, failures = 0;
  leaky_relu dut (.x(x), .y(y));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 3000; i++) begin
      x = rand_fp16(4, 30);
      #1;
      exp_y = (to_real(x) < 0.0) ? to_fp16(to_real(x) / 8.0) : x;
      checks++;
      if (y !== exp_y) begin
        failures++;
        if (failures < 10) $display("lrelu(%h) = %h expected %h", x, y, exp_y);
      end
    end
    x = 16'h0000; #1; checks++; if (y !== 16'h0000) failures++;
    x = 16'h8001; #1; checks++; if (y !== 16'h8001) failures++;   // subnormal passes
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
