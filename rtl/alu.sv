// alu: the PE arithmetic unit, two Special Units sharing one op signal.
//
// Each SU computes one output amplitude: SU0 from row (m0a, m0b) and operand
// pair (x0a, x1a), SU1 from row (m1a, m1b) and pair (x0b, x1b). For a pair
// held inside one PE the input selector gives both SUs the same operands and
// rows 0 and 1 of the gate, so the ALU returns both updated amplitudes of the
// pair in one pass; for a pair split over two PEs each SU handles a different
// pair and the same row. Two SUs per ALU and the shared op follow the paper's
// figure; the operand routing is this design's. Combinational.
module alu
  import hpqea_pkg::*;
(
  input  logic  op,
  // SU0 operands
  input  cplx_t m0a, m0b, x0a, x1a,
  // SU1 operands
  input  cplx_t m1a, m1b, x0b, x1b,
  output cplx_t y0,
  output cplx_t y1
);
  special_unit u_su0 (.op(op), .i0(m0a), .i1(x0a), .i2(m0b), .i3(x1a), .y(y0));
  special_unit u_su1 (.op(op), .i0(m1a), .i1(x0b), .i2(m1b), .i3(x1b), .y(y1));
endmodule
