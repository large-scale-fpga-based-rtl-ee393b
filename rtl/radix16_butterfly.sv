// radix16_butterfly: one 16-point NTT butterfly over GF(P), P = 2^64 - 2^32 + 1.
//
// y[k] = sum_{t=0..15} x[t] * w16^(t*k) mod P, with w16 = 2^12. Every product by a
// power of w16 is a left shift by the constant 12*t*k mod 192 bits (192 is the order of
// 2) followed by the shift-and-add reduction of pa_pkg; no multiplier is used, which is
// the point of this radix and modulus choice. The inverse butterfly (root w16^-1) is the
// same sum read out in reversed order: y_inv[k] = y[(16-k) mod 16].
// The unit is purely combinational: 16 inputs in, 16 outputs out in the same cycle.
// Radix 16, the modulus and the shift-only twiddles follow the paper; the flat
// sum-of-shifts structure (instead of an internal radix-2/4 decomposition) is this
// design's own choice.
module radix16_butterfly
  import pa_pkg::*;
(
  input  logic inverse,
  input  fe_t  x [RADIX],
  output fe_t  y [RADIX]
);

  fe_t yf [RADIX];

  always_comb begin
    for (int k = 0; k < RADIX; k++) begin
      fe_t acc;
      acc = 64'd0;
      for (int t = 0; t < RADIX; t++) acc = fe_add(acc, fe_shl(x[t], (12 * t * k) % 192));
      yf[k] = acc;
    end
    for (int k = 0; k < RADIX; k++) y[k] = inverse ? yf[(RADIX - k) % RADIX] : yf[k];
  end

endmodule
