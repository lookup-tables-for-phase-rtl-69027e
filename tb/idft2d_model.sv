// idft2d_model: behavioural stand-in for the inverse 2-D Fourier transform
// that sits between the randomiser and the quantiser (simulation only).
//
// It collects one whole sub-frame of NX x NY complex samples from the r_*
// stream (raster order, x fastest), computes
//   H[x][y] = 1/sqrt(NX*NY) * sum_{u,v} R[u][v] * exp(+2*pi*i*(u*x/NX + v*y/NY))
// in floating point, and then sends round(Re H) out on the h_* stream in
// raster order with the sub-frame's tags, while r_ready is held low. It
// therefore also acts as a source of long back-pressure on the randomiser.
// Not synthesizable and not fast; meant for small NX, NY.
module idft2d_model
  import lutpr_pkg::*;
#(
  parameter int NX = 4,
  parameter int NY = 4,
  parameter int RW = 16,
  parameter int H_W = 24
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  r_valid,
  output logic                  r_ready,
  input  logic signed [RW-1:0]  r_re,
  input  logic signed [RW-1:0]  r_im,
  input  pix_tag_t              r_tag,
  output logic                  h_valid,
  input  logic                  h_ready,
  output logic signed [H_W-1:0] h_re,
  output pix_tag_t              h_tag
);
  localparam real TWO_PI = 6.283185307179586;

  real re_buf [NX*NY];
  real im_buf [NX*NY];
  pix_tag_t tag_buf [NX*NY];
  int out_val [NX*NY];

  initial begin
    r_ready = 1'b0;
    h_valid = 1'b0;
    h_re = '0;
    h_tag = '0;
    wait (rst_n);
    forever begin
      // collect one sub-frame
      r_ready = 1'b1;
      for (int n = 0; n < NX * NY; ) begin
        @(posedge clk);
        if (r_valid) begin
          re_buf[n] = real'(r_re);
          im_buf[n] = real'(r_im);
          tag_buf[n] = r_tag;
          n++;
        end
      end
      @(negedge clk);
      r_ready = 1'b0;
      // transform
      for (int y = 0; y < NY; y++)
        for (int x = 0; x < NX; x++) begin
          real acc, ang;
          acc = 0.0;
          for (int v = 0; v < NY; v++)
            for (int u = 0; u < NX; u++) begin
              ang = TWO_PI * (real'(u * x) / NX + real'(v * y) / NY);
              acc += re_buf[v*NX+u] * $cos(ang) - im_buf[v*NX+u] * $sin(ang);
            end
          out_val[y*NX+x] = $rtoi($floor(acc / $sqrt(real'(NX * NY)) + 0.5));
        end
      // send
      for (int n = 0; n < NX * NY; n++) begin
        h_valid = 1'b1;
        h_re = H_W'(out_val[n]);
        h_tag = tag_buf[n];
        do @(posedge clk); while (!h_ready);
        @(negedge clk);
      end
      h_valid = 1'b0;
    end
  end
endmodule
