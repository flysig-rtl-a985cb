// dr_add - the add-operator: a dual-rail full-adder cell.
//
// Built, as in the paper's complete dual-rail implementation, from two
// half adders (dual-rail XOR and AND) and a dual-rail OR for the carry:
//   s = (a ^ b) ^ c,  co = (a & b) | ((a ^ b) & c).
// The cell has no state and no acknowledge; with all inputs null both
// outputs are null, and s becomes valid only once all three inputs are
// valid (co may become valid earlier when it is already decided).
// The netlist follows Fig. 6(b) of the paper; the dual-rail gate equations
// are the standard ones.
module dr_add
  import flysig_pkg::*;
(
  input  dr_t a,
  input  dr_t b,
  input  dr_t c,
  output dr_t s,
  output dr_t co
);
  dr_t x1;
  assign x1 = dr_xor(a, b);
  assign s  = dr_xor(x1, c);
  assign co = dr_or(dr_and(a, b), dr_and(x1, c));
endmodule
