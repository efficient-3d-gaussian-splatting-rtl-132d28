// Self-checking test of div_array with a pixel output buffer model: two tiles of
// random numerators and denominators (some pixels with a zero denominator) are
// normalised; every output value is compared with the real quotient rounded to
// FP16, the output order (base 0, 4, ..., 764) and the 192-cycle duration per tile
// are checked.
module tb_div_array;
  import gs_pkg::*;
  import fp16_ref_pkg::*;
  localparam int N = 256, NDIV = 4, TW = 8;
  logic clk = 0, rst_n = 0, start = 0, start_bank = 0, busy, busy_bank, rd_bank, out_valid;
  logic [TW-1:0] start_tx = 0, start_ty = 0, out_tx, out_ty;
  logic [7:0] rd_pix [NDIV];
  pix_acc_t rd_data [NDIV];
  logic [9:0] out_base;
  fp16_t out_val [NDIV];
  pix_acc_t m [2][N];
  int checks = 0, failures = 0;

  div_array #(.N(N), .NDIV(NDIV), .TW(TW)) dut (.*);
  always #5 clk = ~clk;
  always_comb for (int i = 0; i < NDIV; i++) rd_data[i] = m[rd_bank][rd_pix[i]];

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 12) $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int b = 0; b < 2; b++) for (int p = 0; p < N; p++) begin
      m[b][p].den = (p % 17 == 5) ? 16'h0000 : to_fp16(0.1 + real'($urandom % 1000) / 50.0);
      m[b][p].r = to_fp16(real'($urandom % 1000) / 60.0);
      m[b][p].g = to_fp16(real'($urandom % 1000) / 60.0);
      m[b][p].b = to_fp16(real'($urandom % 1000) / 60.0);
    end
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int t = 0; t < 2; t++) begin
      int nout, cyc;
      start = 1; start_bank = 1'(t); start_tx = TW'(3 + t); start_ty = 8'd7;
      @(posedge clk); #1 start = 0;
      nout = 0; cyc = 0;
      while (nout < 3 * N / NDIV && cyc < 400) begin
        @(posedge clk); #1; cyc++;
        if (out_valid) begin
          chk(int'(out_base) == nout * NDIV, $sformatf("base %0d", out_base));
          chk(out_tx == TW'(3 + t) && out_ty == 8'd7, "tile coordinates");
          for (int i = 0; i < NDIV; i++) begin
            int e, p, c;
            fp16_t num, ev;
            e = int'(out_base) + i; p = e / 3; c = e % 3;
            num = (c == 0) ? m[t][p].r : (c == 1) ? m[t][p].g : m[t][p].b;
            ev = (m[t][p].den == 0) ? 16'h0000 : to_fp16(to_real(num) / to_real(m[t][p].den));
            chk(fp_eq(out_val[i], ev), $sformatf("e %0d: %h expected %h", e, out_val[i], ev));
          end
          nout++;
        end
      end
      chk(cyc == 3 * N / NDIV, $sformatf("tile took %0d cycles", cyc));
      @(posedge clk); #1;
      chk(!busy && !out_valid, "idle after tile");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
