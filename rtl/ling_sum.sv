// ling_sum -- sum bit of the Ling adder.
//
// The ordinary sum is s_i = d_i ^ c_i, and the carry into bit i is
// c_i = p_{i-1} & H_{i-1}. Instead of forming that AND first, the sum is
// split on the Ling carry, which arrives last:
//
//   s_i = ~H_{i-1} & d_i  |  H_{i-1} & (d_i ^ p_{i-1})
//
// so d_i ^ p_{i-1} can be computed while H_{i-1} is still settling, and H
// only drives a 2:1 choice. The published expansion writes an XOR in the
// first term; that form gives ~d_i when H_{i-1} = 0 and is not the sum, so
// the AND form, which equals d_i ^ (p_{i-1} & H_{i-1}), is used here.
//
// Interface: d_i, p_im1, h_im1 in; s_i out. For bit 0 the instantiating
// module ties p_im1 and h_im1 to 0 (no carry input). Timing: combinational.
module ling_sum (
  input  logic d_i,
  input  logic p_im1,
  input  logic h_im1,
  output logic s_i
);

  logic d_xor_p;

  always_comb begin
    d_xor_p = d_i ^ p_im1;
    s_i     = (~h_im1 & d_i) | (h_im1 & d_xor_p);
  end

endmodule
