// tb_ref_pkg: reference model of the phasor pool for the testbenches.
//
// Computes entry k of the pool with floating-point cos/sin, independently of
// the integer CORDIC used by the design: L_k = h(seed + k) / 2^32 where h is
// the lowbias32 hash (x ^= x>>16; x *= 0x7feb352d; x ^= x>>15;
// x *= 0x846ca68b; x ^= x>>16), and the
// stored components are floor(A*cos(2*pi*L_k) + 1/2), A = 2^(PH_W-1)-1 (and
// the same for sin). The design may differ from this by one unit in rare
// rounding ties, which the testbenches allow for.
package tb_ref_pkg;

  localparam real TWO_PI = 6.283185307179586;

  function automatic logic [31:0] ref_hash(input logic [31:0] v);
    logic [31:0] t;
    t = v ^ (v >> 16);
    t = t * 32'h7FEB_352D;
    t = t ^ (t >> 15);
    t = t * 32'h846C_A68B;
    return t ^ (t >> 16);
  endfunction

  // Fill c[k], s[k] for k < n.
  function automatic void ref_pool(input logic [31:0] seed, input int n, input int ph_w,
                                   ref int c [], ref int s []);
    logic [31:0] st;
    real a, ph;
    a = real'((1 << (ph_w - 1)) - 1);
    c = new[n];
    s = new[n];
    for (int k = 0; k < n; k++) begin
      st = ref_hash(seed + 32'(k));
      ph = TWO_PI * real'(st) / 4294967296.0;
      c[k] = $rtoi($floor(a * $cos(ph) + 0.5));
      s[k] = $rtoi($floor(a * $sin(ph) + 0.5));
    end
  endfunction

  function automatic int iabs(input int v);
    return (v < 0) ? -v : v;
  endfunction

endpackage
