// x25519_pkg -- constants, types and field helpers for X25519 (Curve25519
// Montgomery-ladder scalar multiplication, RFC 7748) over GF(p), p = 2^255 - 19.
//
// Field elements are carried "partially reduced": any 256-bit value whose
// residue mod p is the element.  The helpers below keep every result below
// 2^256 by folding the bits above position 254 back in with weight 19
// (2^255 = 19 mod p).  Only fe_freeze() produces the canonical value in [0, p).
//
// The ladder microprogram (one Montgomery ladder step, the same formulas as
// RFC 7748 section 5) is also kept here so the core and its documentation
// share one definition.  The use of Curve25519/X25519 follows the paper's
// choice of scalar-multiplication core; the register-file microprogram form is
// this design's own.
package x25519_pkg;

  typedef logic [255:0] fe_t;

  localparam fe_t P   = {1'b0, {250{1'b1}}, 5'b01101};   // 2^255 - 19
  localparam fe_t A24 = 256'd121665;                      // (486662 - 2) / 4
  // Exponent p - 2 for inversion by Fermat's little theorem.
  localparam fe_t P_MINUS_2 = {1'b0, {250{1'b1}}, 5'b01011};

  // Field operations of the register-file ALU.
  typedef enum logic [1:0] {
    FOP_ADD = 2'd0,
    FOP_SUB = 2'd1,
    FOP_MUL = 2'd2
  } fop_e;

  // Register-file map of the ladder state and temporaries.
  typedef enum logic [3:0] {
    R_X1 = 4'd0,  R_X2 = 4'd1,  R_Z2 = 4'd2,  R_X3 = 4'd3,
    R_Z3 = 4'd4,  R_A  = 4'd5,  R_B  = 4'd6,  R_C  = 4'd7,
    R_D  = 4'd8,  R_AA = 4'd9,  R_BB = 4'd10, R_E  = 4'd11,
    R_DA = 4'd12, R_CB = 4'd13, R_T  = 4'd14, R_K24 = 4'd15
  } freg_e;

  typedef struct packed {
    fop_e  op;
    freg_e dst;
    freg_e sa;
    freg_e sb;
  } uins_t;

  localparam int LADDER_LEN = 18;

  // One ladder step (after the conditional swap), RFC 7748 section 5.
  localparam uins_t LADDER_UCODE [LADDER_LEN] = '{
    '{FOP_ADD, R_A,  R_X2, R_Z2},   // A  = x2 + z2
    '{FOP_SUB, R_B,  R_X2, R_Z2},   // B  = x2 - z2
    '{FOP_ADD, R_C,  R_X3, R_Z3},   // C  = x3 + z3
    '{FOP_SUB, R_D,  R_X3, R_Z3},   // D  = x3 - z3
    '{FOP_MUL, R_AA, R_A,  R_A },   // AA = A^2
    '{FOP_MUL, R_BB, R_B,  R_B },   // BB = B^2
    '{FOP_MUL, R_DA, R_D,  R_A },   // DA = D * A
    '{FOP_MUL, R_CB, R_C,  R_B },   // CB = C * B
    '{FOP_SUB, R_E,  R_AA, R_BB},   // E  = AA - BB
    '{FOP_ADD, R_T,  R_DA, R_CB},   // T  = DA + CB
    '{FOP_MUL, R_X3, R_T,  R_T },   // x3 = (DA + CB)^2
    '{FOP_SUB, R_T,  R_DA, R_CB},   // T  = DA - CB
    '{FOP_MUL, R_T,  R_T,  R_T },   // T  = (DA - CB)^2
    '{FOP_MUL, R_Z3, R_X1, R_T },   // z3 = x1 * (DA - CB)^2
    '{FOP_MUL, R_X2, R_AA, R_BB},   // x2 = AA * BB
    '{FOP_MUL, R_T,  R_K24, R_E},   // T  = a24 * E
    '{FOP_ADD, R_T,  R_AA, R_T },   // T  = AA + a24 * E
    '{FOP_MUL, R_Z2, R_E,  R_T }    // z2 = E * (AA + a24 * E)
  };

  // a + b, result below 2^256.
  function automatic fe_t fe_add(fe_t a, fe_t b);
    logic [256:0] s;
    s = {1'b0, a} + {1'b0, b};
    return {1'b0, s[254:0]} + 256'(s[256:255]) * 256'd19;
  endfunction

  // a - b computed as a + 4p - b, result below 2^256.
  function automatic fe_t fe_sub(fe_t a, fe_t b);
    logic [257:0] s;
    s = {2'b0, a} + ({P, 2'b00}) - {2'b0, b};
    return {1'b0, s[254:0]} + 256'(s[257:255]) * 256'd19;
  endfunction

  // Canonical representative in [0, p) of a partially reduced value.
  function automatic fe_t fe_freeze(fe_t v);
    fe_t t;
    t = {1'b0, v[254:0]} + (v[255] ? 256'd19 : 256'd0);
    return (t >= P) ? t - P : t;
  endfunction

  // RFC 7748 scalar clamping.
  function automatic fe_t clamp_scalar(fe_t k);
    fe_t c;
    c = k;
    c[2:0]   = 3'b000;
    c[255]   = 1'b0;
    c[254]   = 1'b1;
    return c;
  endfunction

endpackage
