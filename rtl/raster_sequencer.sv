// raster_sequencer: position of the current target pixel within the OSPR frame.
//
// OSPR computes N_SF sub-frames per frame, each from the whole NX x NY target,
// and the pixels of every pass are taken in the order of the paper's LUT
// example: x fastest, then y (T_{0,0}, T_{1,0}, ..., T_{NX-1,0}, T_{0,1}, ...),
// then the sub-frame number. This block counts accepted pixels in that order
// and derives the boundary tags the rest of the pipeline carries.
//
// Interface and timing: x, y, sf and tag describe the pixel that is next to be
// accepted. When step is high at a rising edge the counters advance to the
// following pixel, wrapping after the last pixel of the last sub-frame to the
// first of the next frame. Synchronous active-low reset to pixel (0,0) of
// sub-frame 0. The tag layout and reset are this design's choices.
module raster_sequencer
  import lutpr_pkg::*;
#(
  parameter int unsigned NX   = NX_DEFAULT,
  parameter int unsigned NY   = NY_DEFAULT,
  parameter int unsigned N_SF = N_SF_DEFAULT,
  localparam int unsigned XW  = (NX > 1) ? $clog2(NX) : 1,
  localparam int unsigned YW  = (NY > 1) ? $clog2(NY) : 1,
  localparam int unsigned SW  = (N_SF > 1) ? $clog2(N_SF) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          step,
  output logic [XW-1:0] x,
  output logic [YW-1:0] y,
  output logic [SW-1:0] sf,
  output pix_tag_t      tag
);

  logic x_last, y_last, sf_last;

  assign x_last  = (x  == XW'(NX - 1));
  assign y_last  = (y  == YW'(NY - 1));
  assign sf_last = (sf == SW'(N_SF - 1));

  always_comb begin
    tag.sosf = (x == '0) && (y == '0);
    tag.eosf = x_last && y_last;
    tag.sof  = tag.sosf && (sf == '0);
    tag.eof  = tag.eosf && sf_last;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      x  <= '0;
      y  <= '0;
      sf <= '0;
    end else if (step) begin
      x <= x_last ? '0 : x + 1'b1;
      if (x_last) begin
        y <= y_last ? '0 : y + 1'b1;
        if (y_last) sf <= sf_last ? '0 : sf + 1'b1;
      end
    end
  end

endmodule
