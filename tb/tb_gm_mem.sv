// tb_gm_mem: Gram-matrix bank. Writes every row with random data, reads the
// whole matrix back, then checks that cycles with we = 0 change nothing and
// that a single-row rewrite touches only that row.
module tb_gm_mem;
  import hfamp_pkg::*;
  logic clk = 0;
  logic we; logic [3:0] waddr; g_t wrow [16]; g_t g [16][16];
  g_t model [16][16];
  int checks = 0, failures = 0;

  gm_mem dut (.clk, .we, .waddr, .wrow, .g);

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic compare();
    for (int i = 0; i < 16; i++)
      for (int j = 0; j < 16; j++) begin
        checks++;
        if (g[i][j] != model[i][j]) begin
          failures++;
          if (failures < 10) $display("FAIL g[%0d][%0d]=%0d exp %0d", i, j, g[i][j], model[i][j]);
        end
      end
  endtask

  initial begin
    we = 0;
    for (int i = 0; i < 16; i++) begin
      @(negedge clk);
      we = 1; waddr = 4'(i);
      for (int j = 0; j < 16; j++) begin wrow[j] = g_t'($urandom_range(1023)); model[i][j] = wrow[j]; end
    end
    @(negedge clk); we = 0;
    compare();
    for (int j = 0; j < 16; j++) wrow[j] = g_t'($urandom_range(1023));
    repeat (3) @(negedge clk);
    compare();
    waddr = 4'd7; we = 1;
    for (int j = 0; j < 16; j++) model[7][j] = wrow[j];
    @(negedge clk); we = 0;
    compare();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
