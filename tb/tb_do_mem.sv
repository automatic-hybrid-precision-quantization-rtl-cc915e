// tb_do_mem: output bank. Random results are offered every cycle with cap
// high on random cycles; after each captured cycle valid must pulse and the
// outputs must hold the captured frame until the next capture.
module tb_do_mem;
  import hfamp_pkg::*;
  logic clk = 0, rst_n = 0, cap = 0;
  x_t xhat_in [16]; d_t d_in [16]; logic [15:0] frame_in;
  logic valid; x_t xhat [16]; d_t d [16]; logic [15:0] frame;
  int checks = 0, failures = 0, caps = 0;

  do_mem dut (.clk, .rst_n, .cap, .xhat_in, .d_in, .frame_in, .valid, .xhat, .d, .frame);

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    x_t mx [16]; d_t md [16]; logic [15:0] mf;
    bit captured, have;
    have = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    checks++;
    if (valid) failures++;
    for (int t = 0; t < 300; t++) begin
      @(negedge clk);
      captured = cap;
      if (cap) begin mx = xhat_in; md = d_in; mf = frame_in; have = 1; caps++; end
      cap = ($urandom_range(2) == 0);
      for (int i = 0; i < 16; i++) begin xhat_in[i] = x_t'($urandom_range(31)); d_in[i] = d_t'($urandom_range(255)); end
      frame_in = 16'($urandom);
      checks++;
      if (valid != captured) failures++;
      if (have) begin
        checks++;
        if (xhat != mx || d != md || frame != mf) begin
          failures++;
          if (failures < 10) $display("FAIL t=%0d held data differs", t);
        end
      end
    end
    checks++;
    if (caps == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
