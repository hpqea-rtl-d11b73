// special_unit: the Special Unit (SU) of the PE ALU.
//
// Two complex multipliers feed one complex adder:
//     dense  (op = 0):  y = I0*I1 + I2*I3
//     sparse (op = 1):  y = I0*I1
// One SU therefore produces one row of a 2x2 gate applied to an amplitude
// pair: with I0 = a, I1 = x0, I2 = b, I3 = x1 it gives a*x0 + b*x1. The two
// multipliers, the adder, the two op-driven multiplexers in front of the
// second multiplier and the constant 1 on one of them are taken from the
// paper's figure of the SU. Which inputs those multiplexers choose between is
// not legible there; here, in sparse mode they replace I2 by 0 and I3 by 1, so
// the second product vanishes and a diagonal gate (S, Rz) costs one product.
// Combinational; all operands Q2.30 complex (64 bits).
module special_unit
  import hpqea_pkg::*;
(
  input  logic  op,     // 1: sparse (diagonal) gate row
  input  cplx_t i0,
  input  cplx_t i1,
  input  cplx_t i2,
  input  cplx_t i3,
  output cplx_t y
);
  localparam cplx_t C_ZERO = '0;
  localparam cplx_t C_ONE  = '{re: fx_t'(1) <<< FX_FRAC, im: '0};

  cplx_t p0, p1, m2, m3;

  always_comb begin
    m2 = op ? C_ZERO : i2;
    m3 = op ? C_ONE  : i3;
  end

  cmul u_cmul0 (.a(i0), .b(i1), .y(p0));
  cmul u_cmul1 (.a(m2), .b(m3), .y(p1));

  always_comb y = c_add(p0, p1);
endmodule
