// cmul: complex multiplier for Q2.30 fixed-point operands.
//
// y = a * b computed with four real products, each truncated back to Q2.30
// (low 30 fraction bits dropped), then one subtract and one add. Purely
// combinational; the paper uses this block (CMul) inside each Special Unit.
// Rounding by truncation and wrap-around on overflow are this design's
// choices; amplitudes and unitary entries stay inside [-1, 1], so the Q2.30
// range of [-2, 2) is not exceeded by a product.
module cmul
  import hpqea_pkg::*;
(
  input  cplx_t a,
  input  cplx_t b,
  output cplx_t y
);
  always_comb y = c_mul(a, b);
endmodule
