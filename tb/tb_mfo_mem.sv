// tb_mfo_mem: matched-filter bank. A new random b vector enters every
// cycle; d0 must be b rounded to 1-3-4 in the same cycle, and tap l must
// give the b that entered 6l+5 cycles earlier (5, 11, 17, 23).
module tb_mfo_mem;
  import hfamp_pkg::*;
  import hfamp_ref_pkg::*;
  localparam int NV = 100;
  logic clk = 0;
  b_t b_in [16]; d_t d0 [16]; b_t b_tap [4][16];
  b_t hist [NV][16];
  int checks = 0, failures = 0;

  mfo_mem dut (.clk, .b_in, .d0, .b_tap);

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int lag;
    for (int t = 0; t < NV; t++) begin
      @(negedge clk);
      for (int i = 0; i < 16; i++) begin b_in[i] = b_t'($urandom_range(1023)); hist[t][i] = b_in[i]; end
      #1;
      for (int i = 0; i < 16; i++) begin
        checks++;
        if (fx(d0[i], D_F) != qz(fx(b_in[i], B_F), 3, 4)) failures++;
      end
      for (int l = 0; l < 4; l++) begin
        lag = 6 * l + 5;
        if (t >= lag)
          for (int i = 0; i < 16; i++) begin
            checks++;
            if (b_tap[l][i] != hist[t-lag][i]) begin
              failures++;
              if (failures < 10) $display("FAIL t=%0d tap %0d lane %0d", t, l, i);
            end
          end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
