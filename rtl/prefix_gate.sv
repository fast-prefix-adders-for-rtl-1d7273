// prefix_gate -- one prefix operator, (g,p) o (g',p') = (g | (p & g'), p & p').
//
// The left operand zl carries the higher bit positions, the right operand
// zr the lower ones; the operator is associative but not commutative. It
// is built from exactly three 2-input gates, named as in the construction
// this design follows:
//   A : p_out = p_l & p_r            (group propagate)
//   B : b     = p_l & g_r
//   C : g_out = g_l | b               (group generate)
// so the generate output is two gate levels behind the right operand and
// one behind the left operand's generate. Purely combinational, no clock.
module prefix_gate
  import pfx_pkg::*;
(
  input  gp_t zl,  // higher-index operand
  input  gp_t zr,  // lower-index operand
  output gp_t y
);

  logic a, b, c;

  assign a = zl.p & zr.p;  // gate A
  assign b = zl.p & zr.g;  // gate B
  assign c = zl.g | b;     // gate C

  assign y.g = c;
  assign y.p = a;

endmodule
