// ling_pkg -- constants and types shared by the 4-bit Ling adder.
//
// WIDTH is the operand width. The carry equations in ling_carry are written
// out for exactly four bits, following the adder this RTL describes, so WIDTH
// is a package constant rather than a per-module parameter.
//
// bitgen_t bundles the three per-bit signals made from one operand bit pair:
// the half-sum d = a XOR b, the generate g = a AND b and the OR-type propagate
// p = a OR b. Bundling them is a choice of this RTL; the schematic draws them
// as three separate wires.
package ling_pkg;

  localparam int unsigned WIDTH = 4;

  typedef struct packed {
    logic d;  // half-sum  a_i ^ b_i
    logic g;  // generate  a_i & b_i
    logic p;  // propagate a_i | b_i
  } bitgen_t;

endpackage
