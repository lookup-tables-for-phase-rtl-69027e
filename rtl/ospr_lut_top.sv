// ospr_lut_top: the per-pixel part of a One-Step Phase-Retrieval (OSPR)
// hologram generator with look-up-table phase randomisation.
//
// OSPR builds each frame from N_SF sub-frames. For every sub-frame the target
// amplitudes |T| are given random phases, inverse Fourier transformed, and
// quantised to the display's binary phase levels; the eye averages the
// sub-frames. Here the random phases come from a fixed pool of N_LUT
// precomputed phasors that is read cyclically, continuing across sub-frame and
// frame boundaries, as the paper proposes. Data path:
//
//   t_*  --> raster_sequencer (tags) --> phase_randomiser --> r_*  (to the
//            inverse 2-D transform, outside this block)
//   h_*  (from the transform)  --> binary_quantiser --> q_*  (hologram bits
//            for the binary phase display, outside this block)
//
// The inverse transform and the display are not part of this RTL; their
// streams are ports. The target source must present the NX x NY amplitudes
// in raster order (x fastest) once per sub-frame, N_SF times per frame; the
// tag on r_* and q_* marks sub-frame and frame boundaries.
//
// Timing: every stream is valid/ready. t_* -> r_*: latency 2 cycles, one
// pixel per cycle. h_* -> q_*: latency 1 cycle, one pixel per cycle. The two
// halves are independent, so the transform may hold any number of pixels.
// Defaults follow the paper (10007-entry pool, 1024x1024, 24 sub-frames);
// the widths, seed, handshakes and tags are this design's own choices. At
// elaboration the paper's three rules for a short pool are checked (prime
// length, longer than N_SF, longer than the larger image dimension); a pool
// that breaks one gives a warning, not an error, since it still works.
module ospr_lut_top
  import lutpr_pkg::*;
#(
  parameter int unsigned NX    = NX_DEFAULT,
  parameter int unsigned NY    = NY_DEFAULT,
  parameter int unsigned N_SF  = N_SF_DEFAULT,
  parameter int unsigned N_LUT = N_LUT_DEFAULT,
  parameter int unsigned AMP_W = AMP_W_DEFAULT,
  parameter int unsigned PH_W  = PH_W_DEFAULT,
  parameter int unsigned H_W   = H_W_DEFAULT,
  parameter logic [31:0] SEED  = SEED_DEFAULT,
  localparam int unsigned AW   = $clog2(N_LUT),
  localparam int unsigned RW   = AMP_W + PH_W,
  localparam int unsigned SW   = (N_SF > 1) ? $clog2(N_SF) : 1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // target amplitudes, raster order, once per sub-frame
  input  logic                 t_valid,
  output logic                 t_ready,
  input  logic [AMP_W-1:0]     t_amp,
  output logic [SW-1:0]        t_sf,       // sub-frame the next pixel belongs to
  // randomised replay field, to the inverse transform
  output logic                 r_valid,
  input  logic                 r_ready,
  output logic signed [RW-1:0] r_re,
  output logic signed [RW-1:0] r_im,
  output pix_tag_t             r_tag,
  output logic [AW-1:0]        r_lut_idx,
  // diffraction field (real part), from the inverse transform
  input  logic                 h_valid,
  output logic                 h_ready,
  input  logic signed [H_W-1:0] h_re,
  input  pix_tag_t             h_tag,
  // binary phase hologram, to the display
  output logic                 q_valid,
  input  logic                 q_ready,
  output logic                 q_bit,
  output pix_tag_t             q_tag
);

  localparam int unsigned XW = (NX > 1) ? $clog2(NX) : 1;
  localparam int unsigned YW = (NY > 1) ? $clog2(NY) : 1;

  logic          t_take;
  logic [XW-1:0] seq_x;
  logic [YW-1:0] seq_y;
  pix_tag_t      seq_tag;

  assign t_take = t_valid && t_ready;

  raster_sequencer #(.NX(NX), .NY(NY), .N_SF(N_SF)) u_seq (
    .clk  (clk),
    .rst_n(rst_n),
    .step (t_take),
    .x    (seq_x),
    .y    (seq_y),
    .sf   (t_sf),
    .tag  (seq_tag)
  );

  phase_randomiser #(
    .N_LUT(N_LUT), .AMP_W(AMP_W), .PH_W(PH_W), .SEED(SEED)
  ) u_rand (
    .clk      (clk),
    .rst_n    (rst_n),
    .t_valid  (t_valid),
    .t_ready  (t_ready),
    .t_amp    (t_amp),
    .t_tag    (seq_tag),
    .r_valid  (r_valid),
    .r_ready  (r_ready),
    .r_re     (r_re),
    .r_im     (r_im),
    .r_tag    (r_tag),
    .r_lut_idx(r_lut_idx)
  );

  binary_quantiser #(.H_W(H_W)) u_quant (
    .clk    (clk),
    .rst_n  (rst_n),
    .h_valid(h_valid),
    .h_ready(h_ready),
    .h_re   (h_re),
    .h_tag  (h_tag),
    .q_valid(q_valid),
    .q_ready(q_ready),
    .q_bit  (q_bit),
    .q_tag  (q_tag)
  );

  // The paper's three rules for a short pool, checked at elaboration. A pool
  // that breaks one still works, but degrades the image.
  function automatic bit is_prime(input int unsigned n);
    if (n < 2) return 1'b0;
    for (int unsigned d = 2; d * d <= n; d++)
      if (n % d == 0) return 1'b0;
    return 1'b1;
  endfunction

  if (!is_prime(N_LUT)) begin : g_rule_prime
    $warning("N_LUT=%0d is not prime: the pool may share a period with the image", N_LUT);
  end
  if (N_LUT <= N_SF) begin : g_rule_subframes
    $warning("N_LUT=%0d is not above N_SF=%0d: sub-frames are not independent", N_LUT, N_SF);
  end
  if (N_LUT <= NX || N_LUT <= NY) begin : g_rule_dimension
    $warning("N_LUT=%0d is not above the larger image dimension", N_LUT);
  end

  // The coordinates are used only to check the sequencer's tags.
  assert property (@(posedge clk) disable iff (!rst_n)
                   seq_tag.sosf == (seq_x == '0 && seq_y == '0))
    else $error("sub-frame start tag out of step with the raster position");

endmodule
