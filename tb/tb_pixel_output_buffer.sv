// Self-checking test of pixel_output_buffer: writes whole tiles into both banks,
// reads them back through the full-tile port and through the four random-access
// ports, and checks that a write to one bank leaves the other unchanged.
module tb_pixel_output_buffer;
  import gs_pkg::*;
  localparam int N = 256, NR = 4;
  logic clk = 0, wr_en = 0, wr_bank = 0, ld_bank = 0, rd_bank = 0;
  pix_acc_t wr_data [N], ld_data [N], rd_data [NR];
  logic [7:0] rd_pix [NR];
  pix_acc_t m [2][N];
  int checks = 0, failures = 0;

  pixel_output_buffer #(.N(N), .NR(NR)) dut (.*);
  always #5 clk = ~clk;

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 12) $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    foreach (rd_pix[i]) rd_pix[i] = '0;
    for (int t = 0; t < 6; t++) begin
      int b;
      b = t % 2;
      wr_en = 1; wr_bank = 1'(b);
      foreach (wr_data[p]) begin wr_data[p] = {$urandom, $urandom}; m[b][p] = wr_data[p]; end
      @(posedge clk); #1 wr_en = 0;
      for (int bb = 0; bb < 2; bb++) begin
        if (t == 0 && bb == 1) continue;
        ld_bank = 1'(bb); #1;
        foreach (ld_data[p]) chk(ld_data[p] == m[bb][p], $sformatf("tile read bank %0d pix %0d", bb, p));
        rd_bank = 1'(bb);
        for (int k = 0; k < 50; k++) begin
          foreach (rd_pix[i]) rd_pix[i] = 8'($urandom);
          #1;
          foreach (rd_pix[i]) chk(rd_data[i] == m[bb][rd_pix[i]], $sformatf("port %0d read", i));
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
