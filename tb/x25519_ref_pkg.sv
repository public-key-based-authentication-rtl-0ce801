// x25519_ref_pkg -- testbench reference model of X25519 (RFC 7748), written
// directly from the RFC's pseudocode with full-width integer arithmetic and the
// % operator, so it shares no structure with the hardware (no partial
// reduction, no microprogram).  Also holds a reference xorshift128 model and
// the repetition-code helper used by several testbenches.
package x25519_ref_pkg;

  typedef logic [255:0] u256_t;
  localparam logic [511:0] PW = 512'h7fffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffed;

  function automatic u256_t mulmod(u256_t a, u256_t b);
    logic [511:0] t;
    t = ({256'd0, a} * {256'd0, b}) % PW;
    return t[255:0];
  endfunction

  function automatic u256_t addmod(u256_t a, u256_t b);
    logic [511:0] t;
    t = ({256'd0, a} + {256'd0, b}) % PW;
    return t[255:0];
  endfunction

  function automatic u256_t submod(u256_t a, u256_t b);
    logic [511:0] t;
    t = ({256'd0, a} + PW - {256'd0, b}) % PW;
    return t[255:0];
  endfunction

  function automatic u256_t x25519_ref(u256_t k_in, u256_t u_in);
    u256_t k, x1, x2, z2, x3, z3, tmp, a, aa, b, bb, e, c, d, da, cb, zi, ex;
    logic swap, kt;
    k = k_in; k[2:0] = 3'b000; k[255] = 1'b0; k[254] = 1'b1;
    x1 = u_in; x1[255] = 1'b0;
    x2 = 1; z2 = 0; x3 = x1; z3 = 1; swap = 0;
    for (int t = 254; t >= 0; t--) begin
      kt = k[t];
      swap ^= kt;
      if (swap) begin tmp = x2; x2 = x3; x3 = tmp; tmp = z2; z2 = z3; z3 = tmp; end
      swap = kt;
      a  = addmod(x2, z2);   aa = mulmod(a, a);
      b  = submod(x2, z2);   bb = mulmod(b, b);
      e  = submod(aa, bb);
      c  = addmod(x3, z3);   d  = submod(x3, z3);
      da = mulmod(d, a);     cb = mulmod(c, b);
      x3 = mulmod(addmod(da, cb), addmod(da, cb));
      z3 = mulmod(x1, mulmod(submod(da, cb), submod(da, cb)));
      x2 = mulmod(aa, bb);
      z2 = mulmod(e, addmod(aa, mulmod(256'd121665, e)));
    end
    if (swap) begin tmp = x2; x2 = x3; x3 = tmp; tmp = z2; z2 = z3; z3 = tmp; end
    // z2^(p-2), right-to-left binary exponentiation
    ex = PW[255:0] - 256'd2;
    zi = 1;
    tmp = z2;
    for (int i = 0; i < 255; i++) begin
      if (ex[i]) zi = mulmod(zi, tmp);
      tmp = mulmod(tmp, tmp);
    end
    return mulmod(x2, zi);
  endfunction

  // Reference xorshift128 generator (Marsaglia 2003).
  typedef struct {
    logic [31:0] x, y, z, w;
  } xs128_t;

  function automatic xs128_t xs_init();
    xs128_t s;
    s.x = 32'd123456789; s.y = 32'd362436069; s.z = 32'd521288629; s.w = 32'd88675123;
    return s;
  endfunction

  // One step; `mix` is XORed into w before the step (seed absorption).
  function automatic xs128_t xs_step(xs128_t s, logic [31:0] mix);
    xs128_t n;
    logic [31:0] t, w;
    w   = s.w ^ mix;
    t   = s.x ^ (s.x << 11);
    n.x = s.y; n.y = s.z; n.z = w;
    n.w = w ^ (w >> 19) ^ (t ^ (t >> 8));
    return n;
  endfunction

endpackage
