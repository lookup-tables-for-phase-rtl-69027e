// tb_ospr_lut_full: one complete frame through ospr_lut_top at its default
// size: a 1024x1024 target, 24 sub-frames, the 10007-entry pool, i.e.
// 25,165,824 randomised pixels. The inverse transform is replaced by a direct
// connection (the randomised real part is fed back as Re(H)), since a
// behavioural transform of that size is far too slow to simulate; the
// transform at small size is covered by tb_ospr_lut_top.
//
// Checks, for every pixel: pool entry n mod 10007 and its products against
// the floating-point reference, the tags, and the hologram bit. Also: the
// pipeline runs at one pixel per clock (the frame takes exactly PIX + 3
// cycles from the first accepted pixel to the last hologram bit), the pool
// wraps floor(PIX/10007) times, and sub-frames start mid-pool.
module tb_ospr_lut_full;
  import lutpr_pkg::*;
  import tb_ref_pkg::*;

  localparam int NX = NX_DEFAULT, NY = NY_DEFAULT, NSF = N_SF_DEFAULT, N = N_LUT_DEFAULT;
  localparam int AMP_W = AMP_W_DEFAULT, PH_W = PH_W_DEFAULT, H_W = H_W_DEFAULT, RW = AMP_W + PH_W;
  localparam int PIX = NX * NY * NSF;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  logic t_valid = 1'b0, t_ready;
  logic [AMP_W-1:0] t_amp;
  logic [4:0] t_sf;
  logic r_valid, r_ready;
  logic signed [RW-1:0] r_re, r_im;
  pix_tag_t r_tag;
  logic [13:0] r_lut_idx;
  logic h_valid, h_ready;
  logic signed [H_W-1:0] h_re;
  pix_tag_t h_tag;
  logic q_valid, q_ready = 1'b1, q_bit;
  pix_tag_t q_tag;

  int checks = 0, failures = 0;
  int rc [], rs [];
  int n_r = 0, n_q = 0, k_r = 0, wraps = 0, carried = 0;
  longint cycle = 0, t_first = -1, t_last = -1;
  bit last_sign [$];

  ospr_lut_top dut (.*);

  // stand-in for the transform: identity on the real part
  assign h_valid = r_valid;
  assign r_ready = h_ready;
  assign h_re    = H_W'(r_re);
  assign h_tag   = r_tag;

  // target amplitude as a function of the raster position (wraps every 256)
  function automatic logic [AMP_W-1:0] amp_of(input int p);
    int x, y;
    x = p % NX;
    y = (p / NX) % NY;
    return AMP_W'(x * 7 + y * 13 + 1);
  endfunction

  always #5 clk = ~clk;
  always @(posedge clk) cycle++;

  initial begin : watchdog
    repeat (PIX + 100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // source: one pixel per clock, raster order, NSF passes
  int n_t = 0;
  always @(posedge clk) begin
    if (rst_n && t_valid && t_ready) begin
      if (t_first < 0) t_first = cycle;
      n_t <= n_t + 1;
    end
  end
  always_comb begin
    t_valid = rst_n && (n_t < PIX);
    t_amp = amp_of(n_t);
  end

  always @(posedge clk) if (rst_n && r_valid && r_ready) begin
    int p, a;
    bit ok;
    p = n_r % (NX * NY);
    a = int'(amp_of(n_r));
    ok = int'(r_lut_idx) == k_r &&
         iabs(int'(r_re) - a * rc[k_r]) <= a && iabs(int'(r_im) - a * rs[k_r]) <= a &&
         r_tag.sosf == (p == 0) && r_tag.eosf == (p == NX * NY - 1) &&
         r_tag.sof == (n_r == 0) && r_tag.eof == (n_r == PIX - 1);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10)
        $display("pixel %0d: entry %0d (exp %0d) value (%0d,%0d) tag %b", n_r, r_lut_idx, k_r, r_re, r_im, r_tag);
    end
    if (r_tag.sosf && k_r != 0) carried++;
    last_sign.push_back(r_re < 0);
    if (k_r == N - 1) begin
      k_r = 0;
      wraps++;
    end else k_r++;
    n_r++;
  end

  always @(posedge clk) if (rst_n && q_valid && q_ready) begin
    bit s;
    s = last_sign.pop_front();
    checks++;
    if (q_bit != s || q_tag.eof != (n_q == PIX - 1)) begin
      failures++;
      if (failures < 10) $display("hologram pixel %0d: bit %0b expected %0b", n_q, q_bit, s);
    end
    n_q++;
    if (n_q == PIX) t_last = cycle;
  end

  initial begin
    ref_pool(SEED_DEFAULT, N, PH_W, rc, rs);
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    wait (n_q == PIX);
    repeat (3) @(negedge clk);
    checks++;
    if (t_last - t_first != PIX + 2) begin
      failures++;
      $display("frame took %0d cycles for %0d pixels", t_last - t_first + 1, PIX);
    end
    checks++;
    if (wraps != PIX / N || carried == 0) begin
      failures++;
      $display("pool wraps %0d (expected %0d), carried sub-frame starts %0d", wraps, PIX / N, carried);
    end
    $display("pixels %0d, cycles %0d, pool wraps %0d, carried sub-frame starts %0d",
             n_q, t_last - t_first + 1, wraps, carried);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
