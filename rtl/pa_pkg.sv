// pa_pkg: constants, types and arithmetic shared by the privacy-amplification core.
//
// Two moduli appear in this design:
//  * The NTT modulus P = 2^64 - 2^32 + 1 (a "Goldilocks" prime). Every NTT element is
//    a 64-bit residue mod P. Reduction uses 2^64 = 2^32 - 1 and 2^96 = -1 (mod P), so
//    a 160-bit value lo + mid*2^64 + hi*2^96 reduces to lo + mid*(2^32-1) - hi.
//    In this field 2 has order 192 and 2^12 is a primitive 16th root of unity, which is
//    why the radix-16 butterfly needs shifts only.
//  * The hashing modulus 2^GAMMA - 1 (a Mersenne prime, GAMMA = 756839 by default),
//    handled by the accumulation units on 24-bit digits.
// The large integers being hashed are cut into 24-bit digits, one per NTT point.
// W65536 is a primitive 65536th root of unity mod P chosen so that W65536^4096 = 2^12,
// which keeps the twiddle ROM consistent with the shift-only butterfly; it is a
// design choice (the value of the root is not published).
package pa_pkg;

  localparam logic [63:0] P       = 64'hFFFF_FFFF_0000_0001;
  localparam logic [63:0] W65536  = 64'hDC92_18A8_6D10_F3A3;
  localparam int          RADIX   = 16;
  localparam int          DIGIT_W = 24;
  localparam int          GAMMA_DEFAULT = 756839;

  typedef logic [63:0]        fe_t;     // element of GF(P)
  typedef logic [DIGIT_W-1:0] digit_t;  // 24-bit digit of a large integer

  // Sources the top requests blocks from.
  typedef enum logic [1:0] {
    SEED_A = 2'd0,   // a_k of the DM3H / MMH seed
    SEED_B = 2'd1,   // b of the MH function
    SEED_C = 2'd2    // c of the MH function
  } seed_kind_e;

  function automatic fe_t fe_add(fe_t a, fe_t b);
    logic [64:0] s;
    s = {1'b0, a} + {1'b0, b};
    if (s >= {1'b0, P}) s = s - {1'b0, P};
    return s[63:0];
  endfunction

  function automatic fe_t fe_sub(fe_t a, fe_t b);
    logic [64:0] s;
    if (a >= b) s = {1'b0, a} - {1'b0, b};
    else        s = {1'b0, a} + {1'b0, P} - {1'b0, b};
    return s[63:0];
  endfunction

  // Reduce a 160-bit value modulo P.
  function automatic fe_t fe_reduce160(logic [159:0] x);
    logic [65:0] t;
    logic [64:0] t1;
    logic [63:0] hi;
    t  = {2'b0, x[63:0]} + {2'b0, x[95:64], 32'b0} - {34'b0, x[95:64]};
    t1 = {1'b0, t[63:0]} + {31'b0, t[65:64], 32'b0} - {63'b0, t[65:64]};
    if (t1 >= {1'b0, P}) t1 = t1 - {1'b0, P};
    hi = x[159:96];
    if (hi >= P) hi = hi - P;
    return fe_sub(t1[63:0], hi);
  endfunction

  function automatic fe_t fe_mul(fe_t a, fe_t b);
    logic [127:0] pr;
    pr = {64'b0, a} * {64'b0, b};
    return fe_reduce160({32'b0, pr});
  endfunction

  // a * 2^s mod P for 0 <= s < 192: a shift and a reduction, no multiplier.
  function automatic fe_t fe_shl(fe_t a, int unsigned s);
    logic [159:0] v;
    fe_t r;
    v = {96'b0, a} << (s % 96);
    r = fe_reduce160(v);
    return (s >= 96) ? fe_sub(64'd0, r) : r;
  endfunction

  function automatic fe_t fe_pow(fe_t base, int unsigned e);
    fe_t r, b;
    r = 64'd1;
    b = base;
    for (int i = 0; i < 32; i++) begin
      if (e[i]) r = fe_mul(r, b);
      b = fe_mul(b, b);
    end
    return r;
  endfunction

endpackage
