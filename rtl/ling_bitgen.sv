// ling_bitgen -- first stage of the Ling adder: bit generate, propagate and
// half-sum for one operand bit pair.
//
//   g_i = a_i & b_i     (generate)
//   p_i = a_i | b_i     (propagate, the inclusive-OR form Ling's equations need)
//   d_i = a_i ^ b_i     (half-sum)
//
// The OR-type propagate is what makes c_{i+1} = p_i & H_i hold: g_i implies
// p_i, so the generate can be folded into the Ling carry. The three
// equations follow the published adder; returning them as one bitgen_t
// struct is this design's choice.
//
// Interface: a_i, b_i in; bits (d, g, p) out. Timing: purely combinational,
// one gate level.
module ling_bitgen
  import ling_pkg::*;
(
  input  logic    a_i,
  input  logic    b_i,
  output bitgen_t bits
);

  always_comb begin
    bits.d = a_i ^ b_i;
    bits.g = a_i & b_i;
    bits.p = a_i | b_i;
  end

endmodule
