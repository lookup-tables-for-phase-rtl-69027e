// tb_phase_lut: reads every entry of the full 10007-entry pool and compares
// it with the floating-point reference of tb_ref_pkg (at most one unit off,
// and exact for nearly all entries). Also checks the one-cycle read latency,
// that the output holds while rd_en is low, and that the pool is a plausible
// spread of phases (mean of the phasors near zero).
module tb_phase_lut;
  import tb_ref_pkg::*;

  localparam int unsigned N    = 10007;
  localparam int unsigned PH_W = 8;
  localparam logic [31:0] SEED = 32'h2545_F491;

  logic clk = 1'b0;
  logic rd_en = 1'b0;
  logic [$clog2(N)-1:0] rd_addr = '0;
  logic signed [PH_W-1:0] cos_q, sin_q;
  int checks = 0, failures = 0;
  int rc [], rs [];

  phase_lut #(.N_LUT(N), .PH_W(PH_W), .SEED(SEED)) dut (.*);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int exact = 0;
    real sum_c = 0.0, sum_s = 0.0;
    ref_pool(SEED, N, PH_W, rc, rs);
    @(negedge clk);
    for (int k = 0; k < int'(N); k++) begin
      rd_en = 1'b1;
      rd_addr = k[$clog2(N)-1:0];
      @(negedge clk);
      checks++;
      if (iabs(int'(cos_q) - rc[k]) > 1 || iabs(int'(sin_q) - rs[k]) > 1) begin
        failures++;
        if (failures < 10)
          $display("entry %0d: got (%0d,%0d) expected (%0d,%0d)", k, cos_q, sin_q, rc[k], rs[k]);
      end
      if (int'(cos_q) == rc[k] && int'(sin_q) == rs[k]) exact++;
      sum_c += real'(cos_q);
      sum_s += real'(sin_q);
    end
    // nearly all entries exact
    checks++;
    if (exact < int'(N) - int'(N) / 100) begin
      failures++;
      $display("only %0d of %0d entries exact", exact, N);
    end
    // mean phasor small: |mean| < 127 * 4/sqrt(N) ~ 5
    checks++;
    if (sum_c / N > 5.0 || sum_c / N < -5.0 || sum_s / N > 5.0 || sum_s / N < -5.0) begin
      failures++;
      $display("phasor mean (%f,%f) too large", sum_c / N, sum_s / N);
    end
    // output holds while rd_en is low
    rd_en = 1'b0;
    rd_addr = '0;
    repeat (3) @(negedge clk);
    checks++;
    if (int'(cos_q) != rc[N-1] || int'(sin_q) != rs[N-1]) begin
      failures++;
      $display("output did not hold with rd_en low");
    end
    $display("exact entries: %0d of %0d", exact, N);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
