// Self-checking test of depth_buffer at its full size (2 banks x 512 entries, rows
// of 256): fills both banks one depth per cycle, reads whole rows back (one cycle
// latency), writes F(d) rows and reads single F(d) values back (one cycle latency),
// checking that the banks do not disturb each other.
module tb_depth_buffer;
  import gs_pkg::*;
  localparam int E = 512, N = 256;
  logic clk = 0;
  logic wr_valid = 0, wr_bank = 0, rd_valid = 0, rd_bank = 0, fw_valid = 0, fw_bank = 0, fr_bank = 0;
  logic [8:0] wr_idx = 0, fr_idx = 0;
  logic [0:0] rd_row = 0, fw_row = 0;
  fp16_t wr_d = 0, fr_f;
  fp16_t d_row [N], fw_data [N];
  fp16_t md [2][E], mf [2][E];
  int checks = 0, failures = 0;

  depth_buffer #(.ENTRIES(E), .N(N)) dut (.*);
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
    foreach (fw_data[i]) fw_data[i] = '0;
    @(posedge clk); #1;
    for (int b = 0; b < 2; b++) for (int i = 0; i < E; i++) begin
      wr_valid = 1; wr_bank = 1'(b); wr_idx = 9'(i); wr_d = 16'($urandom);
      md[b][i] = wr_d;
      @(posedge clk); #1;
    end
    wr_valid = 0;
    for (int b = 0; b < 2; b++) for (int r = 0; r < 2; r++) begin
      rd_valid = 1; rd_bank = 1'(b); rd_row = 1'(r);
      @(posedge clk); #1 rd_valid = 0;
      for (int i = 0; i < N; i++)
        chk(d_row[i] == md[b][r*N+i], $sformatf("depth bank %0d row %0d entry %0d", b, r, i));
    end
    for (int b = 0; b < 2; b++) for (int r = 0; r < 2; r++) begin
      fw_valid = 1; fw_bank = 1'(b); fw_row = 1'(r);
      foreach (fw_data[i]) begin fw_data[i] = 16'($urandom); mf[b][r*N+i] = fw_data[i]; end
      @(posedge clk); #1;
    end
    fw_valid = 0;
    for (int k = 0; k < 600; k++) begin
      int b, i;
      b = int'($urandom % 2); i = int'($urandom % E);
      fr_bank = 1'(b); fr_idx = 9'(i);
      @(posedge clk); #1;
      chk(fr_f == mf[b][i], $sformatf("F bank %0d entry %0d", b, i));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
