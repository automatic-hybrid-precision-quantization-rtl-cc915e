// tb_control_unit: control unit with random in_valid and occasional
// configuration requests. Checks that every accepted frame is reported
// done exactly 24 cycles later and in order, that in_ready is low while a
// configuration request is pending, and that the configuration is granted
// only when no frame is in flight (and then without delay).
module tb_control_unit;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0, cfg_valid = 0;
  logic in_ready, cfg_ready, accept, done, busy;
  logic [15:0] frame_out;
  int checks = 0, failures = 0, grants = 0, drains = 0;
  int acc_time [$];
  int cyc = 0, inflight = 0, nexp = 0;

  control_unit dut (.clk, .rst_n, .in_valid, .in_ready, .cfg_valid, .cfg_ready,
                    .accept, .done, .busy, .frame_out);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int cfg_wait;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 3000; t++) begin
      @(negedge clk);
      cyc++;
      // drive
      in_valid = ($urandom_range(3) != 0);
      if (!cfg_valid && $urandom_range(150) == 0) begin cfg_valid = 1; cfg_wait = 0; end
      #1;
      // checks on this cycle's combinational outputs
      checks++;
      if (in_ready != !cfg_valid) failures++;
      checks++;
      if (cfg_ready != (cfg_valid && inflight == 0)) begin
        failures++;
        $display("FAIL cfg_ready=%0d inflight=%0d", cfg_ready, inflight);
      end
      if (done) begin
        checks++;
        if (acc_time.size() == 0 || cyc - acc_time[0] != 24 || frame_out != 16'(nexp)) begin
          failures++;
          $display("FAIL done at %0d frame %0d", cyc, frame_out);
        end
        if (acc_time.size() != 0) void'(acc_time.pop_front());
        nexp++;
        inflight--;
      end
      if (accept) begin acc_time.push_back(cyc); inflight++; end
      if (cfg_valid && !cfg_ready) cfg_wait++;
      if (cfg_ready) begin
        grants++;
        if (cfg_wait > 0) drains++;
        @(negedge clk); cyc++;
        cfg_valid = 0;
        #1;
        if (done) begin
          checks++; failures++;
          $display("FAIL frame left an empty pipeline");
        end
        if (accept) begin acc_time.push_back(cyc); inflight++; end
      end
    end
    checks++;
    if (grants == 0 || drains == 0 || nexp < 100) begin
      failures++;
      $display("FAIL coverage grants=%0d drains=%0d frames=%0d", grants, drains, nexp);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
