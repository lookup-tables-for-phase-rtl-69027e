// tb_phase_randomiser: streams random amplitudes through the randomiser with
// the paper's 7-entry example pool, random input gaps and random output
// stalls. For the n-th output pixel it expects pool entry n mod 7 and the
// products amplitude*cos and amplitude*sin of that entry (within one unit of
// the phasor, times the amplitude, of the floating-point reference), with the
// tag carried along. A second phase with no stalls checks the 2-cycle latency
// and one pixel per cycle.
module tb_phase_randomiser;
  import lutpr_pkg::*;
  import tb_ref_pkg::*;

  localparam int N = 7, AMP_W = 8, PH_W = 8, RW = AMP_W + PH_W;
  localparam logic [31:0] SEED = 32'h2545_F491;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  logic t_valid = 1'b0, t_ready;
  logic [AMP_W-1:0] t_amp = '0;
  pix_tag_t t_tag = '0;
  logic r_valid, r_ready = 1'b0;
  logic signed [RW-1:0] r_re, r_im;
  pix_tag_t r_tag;
  logic [2:0] r_lut_idx;
  int checks = 0, failures = 0;
  int rc [], rs [];
  int amps [$];
  pix_tag_t tags [$];
  int n_out = 0, stalls = 0, wraps = 0;
  int cycle = 0;
  int acc_cycle [$];
  bit timing_phase = 0;

  phase_randomiser #(.N_LUT(N), .AMP_W(AMP_W), .PH_W(PH_W), .SEED(SEED)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cycle++;

  initial begin : watchdog
    repeat (40000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // input side: record what is accepted
  always @(posedge clk) begin
    if (rst_n && t_valid && t_ready) begin
      amps.push_back(int'(t_amp));
      tags.push_back(t_tag);
      acc_cycle.push_back(cycle);
    end
  end

  // output side: compare what is delivered
  always @(posedge clk) begin
    if (rst_n && r_valid && !r_ready) stalls++;
    if (rst_n && r_valid && r_ready) begin
      int a, k, ec, es, c0;
      pix_tag_t tg;
      a  = amps.pop_front();
      tg = tags.pop_front();
      c0 = acc_cycle.pop_front();
      k  = n_out % N;
      ec = a * rc[k];
      es = a * rs[k];
      checks++;
      if (int'(r_lut_idx) != k || iabs(int'(r_re) - ec) > a || iabs(int'(r_im) - es) > a || r_tag != tg) begin
        failures++;
        if (failures < 10)
          $display("pixel %0d: idx %0d (exp %0d) re %0d (exp %0d) im %0d (exp %0d) tag %b/%b",
                   n_out, r_lut_idx, k, r_re, ec, r_im, es, r_tag, tg);
      end
      if (timing_phase) begin
        checks++;
        if (cycle - c0 != 2) begin
          failures++;
          $display("latency %0d, expected 2", cycle - c0);
        end
      end
      if (k == N - 1) wraps++;
      n_out++;
    end
  end

  initial begin
    ref_pool(SEED, N, PH_W, rc, rs);
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    // phase 1: random gaps and stalls
    for (int i = 0; i < 3000; i++) begin
      if (!t_valid || t_ready) begin
        t_valid = ($urandom_range(3) != 0);
        t_amp   = AMP_W'($urandom);
        t_tag   = pix_tag_t'($urandom);
      end
      r_ready = ($urandom_range(2) != 0);
      @(negedge clk);
    end
    // drain
    t_valid = 1'b0;
    r_ready = 1'b1;
    repeat (5) @(negedge clk);
    // phase 2: full rate, no stalls
    timing_phase = 1;
    begin
      int n_before, t0;
      n_before = n_out;
      t0 = cycle;
      for (int i = 0; i < 100; i++) begin
        t_valid = 1'b1;
        t_amp   = AMP_W'($urandom);
        t_tag   = pix_tag_t'($urandom);
        @(negedge clk);
      end
      t_valid = 1'b0;
      repeat (2) @(negedge clk);
      checks++;
      if (n_out - n_before != 100 || cycle - t0 != 102) begin
        failures++;
        $display("rate: %0d pixels in %0d cycles", n_out - n_before, cycle - t0);
      end
    end
    checks++;
    if (stalls == 0 || wraps < 10 || amps.size() != 0) begin
      failures++;
      $display("coverage: stalls %0d wraps %0d leftover %0d", stalls, wraps, amps.size());
    end
    $display("pixels %0d, stall cycles %0d, pool wraps %0d", n_out, stalls, wraps);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
