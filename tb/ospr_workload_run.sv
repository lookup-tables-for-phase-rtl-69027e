// ospr_workload_run: one complete OSPR experiment around ospr_lut_top, for
// the testbench that reproduces the paper's pool-length study at small size.
//
// For each of N_SF sub-frames it streams the NX x NY target through the
// randomiser, takes the randomised field, applies an inverse 2-D DFT
// (separable, floating point), sends Re(H) back through the quantiser,
// rebuilds the binary hologram (+1 / -1) from the bits, takes its forward
// 2-D DFT and adds the replay intensity |F|^2 to a running sum. At the end it
// reports the relative error of the time-averaged replay against the target
// intensity, err = sum (a*I - T^2)^2 / sum T^4 with the best scale a, over
// the upper half of the replay plane (a binary hologram reproduces the target
// twice, point-mirrored; the target lives in the upper half) without the
// zero-order row. It also checks, pixel by pixel, that entry n mod N_LUT of
// the pool was used and that each bit is the sign of what was sent back.
module ospr_workload_run
  import lutpr_pkg::*;
#(
  parameter int NX = 64,
  parameter int NY = 64,
  parameter int N_SF = 24,
  parameter int N_LUT = 1031
) (
  input  logic clk,
  input  logic rst_n,
  output logic done,
  output real  err,
  output int   checks,
  output int   failures
);
  localparam int AMP_W = 8, PH_W = 8, H_W = 24, RW = AMP_W + PH_W;
  localparam int NP = NX * NY;
  localparam int SW = (N_SF > 1) ? $clog2(N_SF) : 1;
  localparam int AW = $clog2(N_LUT);
  localparam real TWO_PI = 6.283185307179586;

  logic t_valid, t_ready;
  logic [AMP_W-1:0] t_amp;
  logic [SW-1:0] t_sf;
  logic r_valid, r_ready;
  logic signed [RW-1:0] r_re, r_im;
  pix_tag_t r_tag;
  logic [AW-1:0] r_lut_idx;
  logic h_valid, h_ready;
  logic signed [H_W-1:0] h_re;
  pix_tag_t h_tag;
  logic q_valid, q_ready, q_bit;
  pix_tag_t q_tag;

  ospr_lut_top #(.NX(NX), .NY(NY), .N_SF(N_SF), .N_LUT(N_LUT),
                 .AMP_W(AMP_W), .PH_W(PH_W), .H_W(H_W)) dut (.*);

  int   target [NP];
  real  a_re [NP], a_im [NP];     // work arrays for the transforms
  int   hval [NP];
  pix_tag_t tags [NP];
  real  inten [NP];
  real  cw [NX > NY ? NX : NY];
  real  sw [NX > NY ? NX : NY];
  int   n_r, n_q, n_total;

  // Target: amplitude 200 on two bars and a square in the upper half.
  function automatic int target_at(input int x, input int y);
    if (y >= NY / 8 && y < NY / 8 + NY / 16 && x >= NX / 8 && x < NX - NX / 8) return 200;
    if (y >= NY / 4 && y < NY / 4 + NY / 8 && x >= NX / 4 && x < NX / 4 + NY / 8) return 200;
    if (y >= NY / 4 && y < NY / 2 - NY / 16 && x >= NX / 2 + NX / 8 && x < NX / 2 + NX / 8 + NX / 16) return 200;
    return 0;
  endfunction

  // In-place separable 2-D DFT of a_re/a_im, sign +1 (inverse) or -1.
  task automatic dft2(input int sgn);
    real tr [NX > NY ? NX : NY], ti [NX > NY ? NX : NY];
    // rows (along x)
    for (int y = 0; y < NY; y++) begin
      for (int k = 0; k < NX; k++) begin
        tr[k] = 0.0;
        ti[k] = 0.0;
        for (int x = 0; x < NX; x++) begin
          int m;
          real c, s;
          m = (k * x) % NX;
          c = $cos(TWO_PI * m / NX);
          s = sgn * $sin(TWO_PI * m / NX);
          tr[k] += a_re[y*NX+x] * c - a_im[y*NX+x] * s;
          ti[k] += a_re[y*NX+x] * s + a_im[y*NX+x] * c;
        end
      end
      for (int k = 0; k < NX; k++) begin
        a_re[y*NX+k] = tr[k];
        a_im[y*NX+k] = ti[k];
      end
    end
    // columns (along y)
    for (int x = 0; x < NX; x++) begin
      for (int k = 0; k < NY; k++) begin
        tr[k] = 0.0;
        ti[k] = 0.0;
        for (int y = 0; y < NY; y++) begin
          int m;
          real c, s;
          m = (k * y) % NY;
          c = $cos(TWO_PI * m / NY);
          s = sgn * $sin(TWO_PI * m / NY);
          tr[k] += a_re[y*NX+x] * c - a_im[y*NX+x] * s;
          ti[k] += a_re[y*NX+x] * s + a_im[y*NX+x] * c;
        end
      end
      for (int k = 0; k < NY; k++) begin
        a_re[k*NX+x] = tr[k] / $sqrt(real'(NP));
        a_im[k*NX+x] = ti[k] / $sqrt(real'(NP));
      end
    end
  endtask

  bit collect_r = 1'b0, collect_q = 1'b0;

  // randomised field: pixel n of the current sub-frame
  always @(posedge clk) begin
    if (collect_r && r_valid && r_ready) begin
      check(int'(r_lut_idx) == n_total % N_LUT, 2);
      a_re[n_r] = real'(r_re);
      a_im[n_r] = real'(r_im);
      tags[n_r] = r_tag;
      n_r++;
      n_total++;
    end
  end

  // hologram bits, rebuilt as +1 / -1
  always @(posedge clk) begin
    if (collect_q && q_valid && q_ready) begin
      check(q_bit == (hval[n_q] < 0), 4);
      a_re[n_q] = q_bit ? -1.0 : 1.0;
      a_im[n_q] = 0.0;
      n_q++;
    end
  end

  task automatic check(input bit ok, input int what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 6) $display("N_LUT=%0d: check %0d failed at t=%0t (r %0d, q %0d) t_sf %0d", N_LUT, what, $time, n_r, n_q, t_sf);
    end
  endtask

  initial begin
    done = 1'b0;
    err = 0.0;
    checks = 0;
    failures = 0;
    n_total = 0;
    t_valid = 1'b0;
    t_amp = '0;
    r_ready = 1'b0;
    h_valid = 1'b0;
    h_re = '0;
    h_tag = '0;
    q_ready = 1'b0;
    for (int y = 0; y < NY; y++)
      for (int x = 0; x < NX; x++) target[y*NX+x] = target_at(x, y);
    foreach (inten[i]) inten[i] = 0.0;
    wait (rst_n);
    @(negedge clk);
    for (int s = 0; s < N_SF; s++) begin
      // target in, randomised field out (no back-pressure: one pixel per clock)
      n_r = 0;
      r_ready = 1'b1;
      @(negedge clk);
      collect_r = 1'b1;
      for (int n = 0; n < NP; n++) begin
        t_valid = 1'b1;
        t_amp = AMP_W'(target[n]);
        check(t_ready == 1'b1 && int'(t_sf) == s, 1);
        @(negedge clk);
      end
      t_valid = 1'b0;
      wait (n_r == NP);
      collect_r = 1'b0;
      t_valid = 1'b0;
      r_ready = 1'b0;
      // inverse transform, real part back to the quantiser
      dft2(+1);
      foreach (hval[i]) hval[i] = $rtoi($floor(a_re[i] + 0.5));
      n_q = 0;
      q_ready = 1'b1;
      @(negedge clk);
      collect_q = 1'b1;
      for (int n = 0; n < NP; n++) begin
        h_valid = 1'b1;
        h_re = H_W'(hval[n]);
        h_tag = tags[n];
        check(h_ready == 1'b1, 3);
        @(negedge clk);
      end
      h_valid = 1'b0;
      wait (n_q == NP);
      collect_q = 1'b0;
      h_valid = 1'b0;
      q_ready = 1'b0;
      // replay field of the binary sub-frame
      dft2(-1);
      foreach (inten[i]) inten[i] += a_re[i] * a_re[i] + a_im[i] * a_im[i];
    end
    // time-averaged replay against the target, upper half without row 0
    begin
      real sit, sii, stt, a, e;
      sit = 0.0;
      sii = 0.0;
      stt = 0.0;
      for (int y = 1; y < NY / 2; y++)
        for (int x = 0; x < NX; x++) begin
          real t2, i;
          t2 = real'(target[y*NX+x]) ** 2;
          i = inten[y*NX+x];
          sit += i * t2;
          sii += i * i;
          stt += t2 * t2;
        end
      a = sit / sii;
      e = 0.0;
      for (int y = 1; y < NY / 2; y++)
        for (int x = 0; x < NX; x++) begin
          real d;
          d = a * inten[y*NX+x] - real'(target[y*NX+x]) ** 2;
          e += d * d;
        end
      err = e / stt;
    end
    done = 1'b1;
  end
endmodule
