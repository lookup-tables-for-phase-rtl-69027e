// tb_ospr_lut_top: end-to-end run of the OSPR pipeline with the paper's
// look-up-table example (a 7-entry pool, a 4x4 target) for 3 sub-frames per
// frame and 2 frames, with a behavioural inverse transform (idft2d_model)
// between the randomiser and the quantiser and a display that is randomly
// not ready.
//
// Checks: for the n-th pixel sent to the transform, pool entry n mod 7 and
// the amplitude-times-phasor products; the entries of the paper's example
// figure (sub-frame 1 rows 0 1 2 3 / 4 5 6 0 / 1 2 3 4 / 5 6 0 1, and
// sub-frame 2 column x=0 using 2 6 3 0); sub-frame and frame tags; that each
// hologram bit is the sign of the real part the transform returned; the pixel
// counts. Mechanisms that must each happen at least once: pool wrap, a
// sub-frame that starts mid-pool (pointer carried over), a complete frame,
// back-pressure from the transform, back-pressure from the display, and both
// hologram bit values.
module tb_ospr_lut_top;
  import lutpr_pkg::*;
  import tb_ref_pkg::*;

  localparam int NX = 4, NY = 4, NSF = 3, N = 7, FRAMES = 2;
  localparam int AMP_W = 8, PH_W = 8, H_W = 24, RW = AMP_W + PH_W;
  localparam logic [31:0] SEED = 32'h2545_F491;
  localparam int PIX = NX * NY * NSF * FRAMES;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  logic t_valid = 1'b0, t_ready;
  logic [AMP_W-1:0] t_amp = '0;
  logic [1:0] t_sf;
  logic r_valid, r_ready;
  logic signed [RW-1:0] r_re, r_im;
  pix_tag_t r_tag;
  logic [2:0] r_lut_idx;
  logic h_valid, h_ready;
  logic signed [H_W-1:0] h_re;
  pix_tag_t h_tag;
  logic q_valid, q_ready = 1'b0, q_bit;
  pix_tag_t q_tag;

  int checks = 0, failures = 0;
  int rc [], rs [];
  int target [NX*NY];
  int n_r = 0, n_h = 0, n_q = 0;
  int h_vals [$];
  int idx_seen [PIX];
  // mechanism counters
  int c_wrap = 0, c_carry = 0, c_frame = 0, c_r_stall = 0, c_q_stall = 0, c_bit0 = 0, c_bit1 = 0;

  ospr_lut_top #(.NX(NX), .NY(NY), .N_SF(NSF), .N_LUT(N), .AMP_W(AMP_W), .PH_W(PH_W),
                 .H_W(H_W), .SEED(SEED)) dut (.*);

  idft2d_model #(.NX(NX), .NY(NY), .RW(RW), .H_W(H_W)) xform (
    .clk, .rst_n, .r_valid, .r_ready, .r_re, .r_im, .r_tag,
    .h_valid, .h_ready, .h_re, .h_tag);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 15) $display("FAIL %s", what);
    end
  endtask

  // randomised field leaving the pipeline
  always @(posedge clk) if (rst_n) begin
    if (r_valid && !r_ready) c_r_stall++;
    if (r_valid && r_ready) begin
      int p, k, a;
      p = n_r % (NX * NY * NSF);
      k = n_r % N;
      a = target[p % (NX * NY)];
      check(int'(r_lut_idx) == k, $sformatf("pixel %0d used entry %0d, expected %0d", n_r, r_lut_idx, k));
      check(iabs(int'(r_re) - a * rc[k]) <= a && iabs(int'(r_im) - a * rs[k]) <= a,
            $sformatf("pixel %0d value (%0d,%0d)", n_r, r_re, r_im));
      check(r_tag.sosf == (p % (NX * NY) == 0) && r_tag.eosf == (p % (NX * NY) == NX * NY - 1) &&
            r_tag.sof == (p == 0) && r_tag.eof == (p == NX * NY * NSF - 1),
            $sformatf("pixel %0d tag %b", n_r, r_tag));
      if (k == N - 1) c_wrap++;
      if (r_tag.sosf && k != 0) c_carry++;
      idx_seen[n_r] = int'(r_lut_idx);
      n_r++;
    end
  end

  // field returned by the transform
  always @(posedge clk) if (rst_n && h_valid && h_ready) begin
    h_vals.push_back(int'(h_re));
    n_h++;
  end

  // hologram bits to the display
  always @(posedge clk) if (rst_n) begin
    if (q_valid && !q_ready) c_q_stall++;
    if (q_valid && q_ready) begin
      int v, p;
      v = h_vals.pop_front();
      p = n_q % (NX * NY * NSF);
      check(q_bit == (v < 0), $sformatf("bit %0d for Re(H)=%0d", q_bit, v));
      check(q_tag.sosf == (p % (NX * NY) == 0) && q_tag.eof == (p == NX * NY * NSF - 1),
            $sformatf("hologram pixel %0d tag %b", n_q, q_tag));
      if (q_tag.eof) c_frame++;
      if (q_bit) c_bit1++; else c_bit0++;
      n_q++;
    end
  end

  always @(negedge clk) q_ready = ($urandom_range(3) != 0);

  initial begin
    ref_pool(SEED, N, PH_W, rc, rs);
    foreach (target[i]) target[i] = 1 + $urandom_range(254);
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    // target source: the 4x4 image once per sub-frame, with occasional gaps
    for (int f = 0; f < FRAMES; f++)
      for (int s = 0; s < NSF; s++)
        for (int i = 0; i < NX * NY; ) begin
          t_valid = ($urandom_range(4) != 0);
          t_amp = AMP_W'(target[i]);
          @(posedge clk);
          if (t_valid && t_ready) begin
            check(int'(t_sf) == s, $sformatf("sub-frame counter %0d, expected %0d", t_sf, s));
            i++;
          end
          @(negedge clk);
        end
    t_valid = 1'b0;
    wait (n_q == PIX);
    repeat (3) @(negedge clk);

    // the paper's example figure (N_LUT = 7, 4x4): printed pool indices
    begin
      int sf1 [16] = '{0, 1, 2, 3, 4, 5, 6, 0, 1, 2, 3, 4, 5, 6, 0, 1};
      int sf2_col0 [4] = '{2, 6, 3, 0};
      for (int i = 0; i < 16; i++)
        check(idx_seen[i] == sf1[i], $sformatf("sub-frame 1 pixel %0d: entry %0d, figure shows %0d", i, idx_seen[i], sf1[i]));
      for (int y = 0; y < 4; y++)
        check(idx_seen[16 + 4 * y] == sf2_col0[y],
              $sformatf("sub-frame 2 (0,%0d): entry %0d, figure shows %0d", y, idx_seen[16 + 4 * y], sf2_col0[y]));
    end

    check(n_r == PIX && n_h == PIX && n_q == PIX, $sformatf("counts r %0d h %0d q %0d", n_r, n_h, n_q));
    check(c_wrap > 0,    "pool never wrapped");
    check(c_carry > 0,   "no sub-frame started mid-pool");
    check(c_frame == FRAMES, $sformatf("%0d frames completed", c_frame));
    check(c_r_stall > 0, "transform never stalled the randomiser");
    check(c_q_stall > 0, "display never stalled the quantiser");
    check(c_bit0 > 0 && c_bit1 > 0, "only one hologram bit value seen");
    $display("pool wraps %0d, carried sub-frame starts %0d, frames %0d, transform stalls %0d, display stalls %0d, bits 0/1 %0d/%0d",
             c_wrap, c_carry, c_frame, c_r_stall, c_q_stall, c_bit0, c_bit1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
