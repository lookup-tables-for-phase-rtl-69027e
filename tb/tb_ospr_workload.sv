// tb_ospr_workload: the paper's pool-length study, reproduced at its
// smallest image size (64x64, 24 binary phase OSPR sub-frames) for four pool
// lengths, each a complete run of ospr_lut_top through floating-point
// transforms (ospr_workload_run):
//   23   - shorter than the number of sub-frames
//   64   - equal to the image width, so every row gets the same phases
//   1031 - a prime near a quarter of the image size
//   4099 - a prime above the image size (no repetition within a sub-frame)
// It checks every pixel of every run (pool entry, hologram bit) and that the
// time-averaged error shows the effect the paper reports: a pool whose
// length matches the row width gives clearly more error than a prime pool,
// and the long prime pool is no worse than the shortest one.
module tb_ospr_workload;
  logic clk = 1'b0;
  logic rst_n = 1'b0;
  logic done [4];
  real err [4];
  int chk [4], fl [4];
  int checks = 0, failures = 0;
  localparam int LEN [4] = '{23, 64, 1031, 4099};

  ospr_workload_run #(.N_LUT(23))   run0 (.clk, .rst_n, .done(done[0]), .err(err[0]), .checks(chk[0]), .failures(fl[0]));
  ospr_workload_run #(.N_LUT(64))   run1 (.clk, .rst_n, .done(done[1]), .err(err[1]), .checks(chk[1]), .failures(fl[1]));
  ospr_workload_run #(.N_LUT(1031)) run2 (.clk, .rst_n, .done(done[2]), .err(err[2]), .checks(chk[2]), .failures(fl[2]));
  ospr_workload_run #(.N_LUT(4099)) run3 (.clk, .rst_n, .done(done[3]), .err(err[3]), .checks(chk[3]), .failures(fl[3]));

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (24 * 2 * 64 * 64 + 10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    wait (done[0] && done[1] && done[2] && done[3]);
    for (int i = 0; i < 4; i++) begin
      checks += chk[i];
      failures += fl[i];
      $display("N_LUT=%0d: relative error %f (%0d pixel checks, %0d failed)", LEN[i], err[i], chk[i], fl[i]);
    end
    checks++;
    if (!(err[1] > 1.2 * err[2] && err[1] > 1.2 * err[3])) begin
      failures++;
      $display("a row-periodic pool did not give clearly more error");
    end
    checks++;
    if (!(err[3] <= err[0])) begin
      failures++;
      $display("the long prime pool gave more error than the shortest pool");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
