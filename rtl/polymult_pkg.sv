// polymult_pkg -- types and helpers shared by the polynomial multiplier.
//
// Coefficients of the ring R_q = Z_q[x]/(x^n+1) use a power-of-two
// modulus q = 2^QW, so a modular reduction is simply keeping the low QW bits
// (QW = 13 for Saber, q = 8192). Operand coefficients that travel through the
// systolic arrays are kept in sign-magnitude form, so that taking the
// negative of a coefficient (needed for the x^n = -1 wrap-around) is a flip of
// the sign bit. Accumulated results are plain QW-bit residues.
//
// The 13-bit magnitude and the sign-magnitude format follow the Saber
// implementation of the multiplier; the helper functions are this design's.
package polymult_pkg;

  // bit length of the modulus q = 2^QW
  localparam int unsigned QW = 13;

  // a residue modulo q
  typedef logic [QW-1:0] coef_t;

  // a sign-magnitude operand: value = (sign ? -mag : mag) mod q
  typedef struct packed {
    logic  sign;
    coef_t mag;
  } coef_sm_t;

  // negative of a sign-magnitude operand
  function automatic coef_sm_t sm_neg(coef_sm_t x);
    return '{sign: ~x.sign, mag: x.mag};
  endfunction

  // residue modulo q of a sign-magnitude operand
  function automatic coef_t sm_to_mod(coef_sm_t x);
    return x.sign ? coef_t'(-x.mag) : x.mag;
  endfunction

  // a residue as a (non-negative) sign-magnitude operand
  function automatic coef_sm_t mod_to_sm(coef_t v);
    return '{sign: 1'b0, mag: v};
  endfunction

endpackage
