// lutpr_pkg: shared constants, the pixel tag and the compile-time generator
// of the random phasor pool used by the LUT phase randomiser.
//
// The pool holds N_LUT unit phasors e^{2*pi*i*L_k} with L_k uniform on [0,1).
// Nothing here is evaluated at run time: phasor_entry() is only called while a
// memory is initialised, so the hardware needs neither a pseudo-random number
// generator nor a trigonometric unit. The default sizes (a 10007-entry pool,
// a 1024x1024 binary phase display, 24 sub-frames per frame) follow the paper;
// the uniform source (an integer hash of the entry index), the integer CORDIC that turns L_k into
// cos/sin, and the tag layout are this design's own choices.
package lutpr_pkg;

  // ---- default sizes -------------------------------------------------------
  localparam int unsigned N_LUT_DEFAULT = 10007;  // first prime above 10000
  localparam int unsigned NX_DEFAULT    = 1024;   // display columns
  localparam int unsigned NY_DEFAULT    = 1024;   // display rows
  localparam int unsigned N_SF_DEFAULT  = 24;     // OSPR sub-frames per frame
  localparam int unsigned AMP_W_DEFAULT = 8;      // target amplitude bits
  localparam int unsigned PH_W_DEFAULT  = 8;      // bits per phasor component
  localparam int unsigned H_W_DEFAULT   = 24;     // bits of Re(H) from the transform
  localparam logic [31:0] SEED_DEFAULT  = 32'h2545_F491;

  // ---- pixel tag -----------------------------------------------------------
  // Travels with every pixel so that the transform and the display know where
  // sub-frames and frames begin and end.
  typedef struct packed {
    logic sof;   // first pixel of the first sub-frame of a frame
    logic eof;   // last pixel of the last sub-frame of a frame
    logic sosf;  // first pixel of a sub-frame
    logic eosf;  // last pixel of a sub-frame
  } pix_tag_t;

  // ---- uniform source ------------------------------------------------------
  // Counter-based generator: L_k = pool_hash(seed + k) / 2^32. Each entry
  // depends only on its own index, so every entry can be computed on its own
  // at elaboration. pool_hash is the "lowbias32" integer hash (xor-shift,
  // multiply, xor-shift, multiply, xor-shift), a bijection on 32-bit words.
  function automatic logic [31:0] pool_hash(input logic [31:0] v);
    logic [31:0] t;
    t = v ^ (v >> 16);
    t = t * 32'h7FEB_352D;
    t = t ^ (t >> 15);
    t = t * 32'h846C_A68B;
    return t ^ (t >> 16);
  endfunction

  // ---- integer CORDIC ------------------------------------------------------
  // Angles are in units of 2*pi/2^32. ATAN[i] = round(atan(2^-i) / (2*pi) * 2^32).
  localparam int unsigned CORDIC_ITER = 16;
  localparam longint ATAN [CORDIC_ITER] = '{
    536870912, 316933406, 167458907, 85004756, 42667331, 21354465,
    10679838, 5340245, 2670163, 1335087, 667544, 333772, 166886,
    83443, 41722, 20861
  };
  // CORDIC gain compensation: round(prod(1/sqrt(1+2^-2i)) * 2^30).
  localparam longint CORDIC_K = 652032874;

  // cos and sin of 2*pi*u/2^32, each scaled by 2^30, packed as {cos, sin}
  // (two signed 32-bit halves).
  function automatic logic [63:0] cordic_phasor(input logic [31:0] u);
    longint x, y, z, xn;
    logic [31:0] c, s;
    // Rotate by the residue inside the quadrant (0 .. pi/2), then by the quadrant.
    x = CORDIC_K;
    y = 0;
    z = longint'({2'b00, u[29:0]});
    for (int i = 0; i < CORDIC_ITER; i++) begin
      if (z >= 0) begin
        xn = x - (y >>> i);
        y  = y + (x >>> i);
        z  = z - ATAN[i];
      end else begin
        xn = x + (y >>> i);
        y  = y - (x >>> i);
        z  = z + ATAN[i];
      end
      x = xn;
    end
    case (u[31:30])
      2'd0:    begin c = 32'( x); s = 32'( y); end
      2'd1:    begin c = 32'(-y); s = 32'( x); end
      2'd2:    begin c = 32'(-x); s = 32'(-y); end
      default: begin c = 32'( y); s = 32'(-x); end
    endcase
    return {c, s};
  endfunction

  // Round a 2^30-scaled value in [-1,1] to a signed integer in [-A, A],
  // A = 2^(w-1) - 1, as floor(A*v + 1/2).
  function automatic longint scale_round(input logic [31:0] v, input int unsigned w);
    longint a;
    longint r;
    a = (longint'(1) <<< (w - 1)) - 1;
    r = (longint'($signed(v)) * a + (longint'(1) <<< 29)) >>> 30;
    if (r > a) r = a;
    if (r < -a) r = -a;
    return r;
  endfunction

  // Entry k of a pool: {cos, sin} of 2*pi*pool_hash(seed + k)/2^32, each
  // rounded to w bits.
  function automatic logic [63:0] pool_entry(input logic [31:0] seed, input int unsigned k,
                                             input int unsigned w);
    logic [63:0] cs;
    logic [31:0] c, s;
    cs = cordic_phasor(pool_hash(seed + k));
    c  = 32'(scale_round(cs[63:32], w));
    s  = 32'(scale_round(cs[31:0], w));
    return {c, s};
  endfunction

endpackage
