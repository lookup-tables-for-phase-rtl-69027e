// tb_lut_addr_gen: drives random steps into two pointers, one with the
// paper's 7-entry example pool and one with the full 10007-entry pool, and
// compares addr and wrap with a counter kept in the testbench. Checks that
// the pointer holds without step, wraps from N-1 to 0, and restarts at 0 on
// reset.
module tb_lut_addr_gen;
  logic clk = 1'b0;
  logic rst_n = 1'b0;
  logic step_a = 1'b0, step_b = 1'b0;
  logic [2:0]  addr_a;
  logic [13:0] addr_b;
  logic wrap_a, wrap_b;
  int checks = 0, failures = 0;
  int ma = 0, mb = 0, wraps_a = 0, wraps_b = 0;

  lut_addr_gen #(.N_LUT(7))     dut_a (.clk, .rst_n, .step(step_a), .addr(addr_a), .wrap(wrap_a));
  lut_addr_gen #(.N_LUT(10007)) dut_b (.clk, .rst_n, .step(step_b), .addr(addr_b), .wrap(wrap_b));

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic compare();
    checks++;
    if (int'(addr_a) != ma || wrap_a != (ma == 6) || int'(addr_b) != mb || wrap_b != (mb == 10006)) begin
      failures++;
      if (failures < 10)
        $display("t=%0t a:%0d/%0d(w%0b) b:%0d/%0d(w%0b)", $time, addr_a, ma, wrap_a, addr_b, mb, wrap_b);
    end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    compare();
    for (int i = 0; i < 30000; i++) begin
      step_a = ($urandom_range(3) != 0);
      step_b = ($urandom_range(7) != 0);
      @(negedge clk);
      if (step_a) begin
        if (ma == 6) wraps_a++;
        ma = (ma + 1) % 7;
      end
      if (step_b) begin
        if (mb == 10006) wraps_b++;
        mb = (mb + 1) % 10007;
      end
      compare();
    end
    step_a = 1'b0;
    step_b = 1'b0;
    rst_n = 1'b0;
    @(negedge clk);
    ma = 0;
    mb = 0;
    compare();
    checks++;
    if (wraps_a < 100 || wraps_b < 1) begin
      failures++;
      $display("too few wraps: %0d %0d", wraps_a, wraps_b);
    end
    $display("wraps: %0d (N=7), %0d (N=10007)", wraps_a, wraps_b);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
