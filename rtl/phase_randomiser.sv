// phase_randomiser: gives each target amplitude a phase drawn from the pool.
//
// For every pixel it forms R' = |T| * e^{2*pi*i*L_k} = (|T|*cos_k, |T|*sin_k),
// where k is the cyclic pool pointer of lut_addr_gen and (cos_k, sin_k) is
// entry k of phase_lut. That is the whole of the paper's "randomise target
// phase" step: one look-up and two real multiplications per pixel, with no
// random number generator and no sine or cosine unit. The products are kept
// at full width (AMP_W+PH_W bits, no rounding); the stream handshake and
// pipelining are this design's choices.
//
// Interface: valid/ready streams on both sides (a transfer happens when
// valid and ready are both high at a rising edge). Input: unsigned amplitude
// t_amp with its tag. Output: signed r_re, r_im, the tag, and r_lut_idx, the
// pool entry that was used. Timing: two register stages, latency 2 cycles,
// one pixel per cycle while r_ready stays high. The whole pipe stalls while
// its output is held (t_ready = !r_valid || r_ready). The pointer advances
// only on an accepted pixel, so a stall never skips or repeats an entry.
module phase_randomiser
  import lutpr_pkg::*;
#(
  parameter int unsigned N_LUT = N_LUT_DEFAULT,
  parameter int unsigned AMP_W = AMP_W_DEFAULT,
  parameter int unsigned PH_W  = PH_W_DEFAULT,
  parameter logic [31:0] SEED  = SEED_DEFAULT,
  localparam int unsigned AW   = $clog2(N_LUT),
  localparam int unsigned RW   = AMP_W + PH_W
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // target amplitudes
  input  logic                 t_valid,
  output logic                 t_ready,
  input  logic [AMP_W-1:0]     t_amp,
  input  pix_tag_t             t_tag,
  // randomised replay field
  output logic                 r_valid,
  input  logic                 r_ready,
  output logic signed [RW-1:0] r_re,
  output logic signed [RW-1:0] r_im,
  output pix_tag_t             r_tag,
  output logic [AW-1:0]        r_lut_idx
);

  logic                   adv, take;
  logic [AW-1:0]          ptr;
  logic                   ptr_wrap;
  logic signed [PH_W-1:0] cos_k, sin_k;

  // stage 1: amplitude and tag beside the memory read
  logic                   s1_valid;
  logic [AMP_W-1:0]       s1_amp;
  pix_tag_t               s1_tag;
  logic [AW-1:0]          s1_idx;

  assign adv     = !r_valid || r_ready;
  assign t_ready = adv;
  assign take    = t_valid && adv;

  lut_addr_gen #(.N_LUT(N_LUT)) u_addr (
    .clk  (clk),
    .rst_n(rst_n),
    .step (take),
    .addr (ptr),
    .wrap (ptr_wrap)
  );

  phase_lut #(.N_LUT(N_LUT), .PH_W(PH_W), .SEED(SEED)) u_lut (
    .clk    (clk),
    .rd_en  (take),
    .rd_addr(ptr),
    .cos_q  (cos_k),
    .sin_q  (sin_k)
  );

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      s1_valid <= 1'b0;
      r_valid  <= 1'b0;
    end else if (adv) begin
      s1_valid <= t_valid;
      r_valid  <= s1_valid;
    end
  end

  always_ff @(posedge clk) begin
    if (take) begin
      s1_amp <= t_amp;
      s1_tag <= t_tag;
      s1_idx <= ptr;
    end
    if (adv && s1_valid) begin
      r_re      <= $signed({1'b0, s1_amp}) * cos_k;
      r_im      <= $signed({1'b0, s1_amp}) * sin_k;
      r_tag     <= s1_tag;
      r_lut_idx <= s1_idx;
    end
  end

  // ptr_wrap is only of interest to the assertion below.
  assert property (@(posedge clk) disable iff (!rst_n)
                   take && ptr_wrap |=> ptr == '0)
    else $error("pool pointer did not wrap to 0");
  // Output must hold while the consumer is not ready.
  assert property (@(posedge clk) disable iff (!rst_n)
                   r_valid && !r_ready |=> r_valid && $stable(r_re) && $stable(r_im))
    else $error("output changed while stalled");

endmodule
