// ling_carry -- Ling pseudo-carries H3..H0 of a 4-bit adder and its carry out.
//
// The Ling carry of bit i is H_i = g_i + c_i, the bit generate ORed with the
// ordinary carry into bit i. Since g_i implies p_i (OR-type propagate), the
// real carry out of bit i is recovered as c_{i+1} = p_i & H_i. Written in the
// Ling generate/propagate terms G*, P* of ling_gp, the four carries are
//
//   H3 = G*3 | P*2 & G*1
//   H2 = G*2 | P*1 & G*0
//   H1 = G*1
//   H0 = G*0
//
// so the deepest one is an AND-OR of two levels on top of the G*/P* stage.
// The carry out of the 4-bit sum is c4 = p3 & H3. The published text writes
// this as "H4 . p4"; with carries H3..H0 the carry leaving bit 3 is H3 . p3,
// which is what is built here.
//
// Interface: gs[3:0] = G*, ps[3:0] = P*, p_msb = p3 in; h[3:0], cout out.
// ps[0] and ps[3] are not used by the equations; they are kept on the port so
// the module takes the whole G*/P* vectors. Timing: purely combinational.
module ling_carry
  import ling_pkg::*;
(
  input  logic [WIDTH-1:0] gs,
  input  logic [WIDTH-1:0] ps,
  input  logic             p_msb,
  output logic [WIDTH-1:0] h,
  output logic             cout
);

  always_comb begin
    h[3] = gs[3] | (ps[2] & gs[1]);
    h[2] = gs[2] | (ps[1] & gs[0]);
    h[1] = gs[1];
    h[0] = gs[0];
    cout = p_msb & h[3];
  end

endmodule
