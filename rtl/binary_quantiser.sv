// binary_quantiser: the SLM modulation constraint of a binary phase display.
//
// A binary phase pixel can only show +1 (phase 0) or -1 (phase pi). The
// quantiser replaces each diffraction-field sample H by the nearer of the two,
// which is decided by the sign of Re(H) alone: Re(H) < 0 gives -1, encoded
// as q_bit = 1. A sample with Re(H) = 0 is equally far from both; it is given
// phase 0 (q_bit = 0), a choice of this design. Im(H) does not affect the
// decision and is not taken in.
//
// Interface and timing: valid/ready streams; one register stage, latency 1
// cycle, one pixel per cycle; h_ready = !q_valid || q_ready. The tag is
// passed along with the bit.
module binary_quantiser
  import lutpr_pkg::*;
#(
  parameter int unsigned H_W = H_W_DEFAULT
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                h_valid,
  output logic                h_ready,
  input  logic signed [H_W-1:0] h_re,
  input  pix_tag_t            h_tag,
  output logic                q_valid,
  input  logic                q_ready,
  output logic                q_bit,
  output pix_tag_t            q_tag
);

  logic adv;
  assign adv     = !q_valid || q_ready;
  assign h_ready = adv;

  always_ff @(posedge clk) begin
    if (!rst_n)   q_valid <= 1'b0;
    else if (adv) q_valid <= h_valid;
  end

  always_ff @(posedge clk) begin
    if (adv && h_valid) begin
      q_bit <= (h_re < 0);
      q_tag <= h_tag;
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n)
                   q_valid && !q_ready |=> q_valid && $stable(q_bit))
    else $error("hologram bit changed while stalled");

endmodule
