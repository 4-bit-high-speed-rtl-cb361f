// ling_adder4 -- 4-bit binary Ling adder, s = a + b with carry out.
//
// Four stages, as in the published logic diagram:
//   1. ling_bitgen x4 : d_i, g_i, p_i for each bit pair.
//   2. ling_gp     x4 : G*_i = g_i | g_{i-1}, P*_i = p_i & p_{i-1};
//                       g_{-1} and p_{-1} are tied to 0 for bit 0.
//   3. ling_carry     : H3..H0 from G*/P*, and cout = p3 & H3.
//   4. ling_sum    x4 : s_i = ~H_{i-1} & d_i | H_{i-1} & (d_i ^ p_{i-1});
//                       bit 0 has no carry in, so H_{-1} = p_{-1} = 0 and
//                       s0 = d0.
//
// The structure and equations follow the published adder. This RTL's own
// choices: the per-bit signals travel as a bitgen_t struct, the H gates are
// gathered into one module, the carry out is p3 & H3 (the text's "H4 . p4"
// read with the H3..H0 indexing) and the sum uses the AND form of the
// expansion (see ling_sum).
//
// Interface: a[3:0], b[3:0] in; s[3:0], cout out. Timing: purely
// combinational, no clock and no reset; the result is valid after the
// longest path, bitgen -> gp -> AND-OR of H3/H2 -> sum (or carry AND).
module ling_adder4
  import ling_pkg::*;
(
  input  logic [WIDTH-1:0] a,
  input  logic [WIDTH-1:0] b,
  output logic [WIDTH-1:0] s,
  output logic             cout
);

  bitgen_t [WIDTH-1:0] bits;
  logic    [WIDTH-1:0] g, p, d;
  logic    [WIDTH-1:0] g_lo, p_lo;   // neighbour bit i-1, 0 below bit 0
  logic    [WIDTH-1:0] gs, ps;       // Ling generate / propagate
  logic    [WIDTH-1:0] h;            // Ling carries
  logic    [WIDTH-1:0] h_lo;         // H_{i-1}, 0 below bit 0

  for (genvar i = 0; i < WIDTH; i++) begin : g_bit
    ling_bitgen u_bitgen (
      .a_i  (a[i]),
      .b_i  (b[i]),
      .bits (bits[i])
    );

    assign d[i] = bits[i].d;
    assign g[i] = bits[i].g;
    assign p[i] = bits[i].p;
  end

  // Shift the per-bit vectors up by one so bit i sees bit i-1; the
  // non-existent bit -1 is grounded.
  assign g_lo = {g[WIDTH-2:0], 1'b0};
  assign p_lo = {p[WIDTH-2:0], 1'b0};
  assign h_lo = {h[WIDTH-2:0], 1'b0};  // H3 feeds only the carry out,
                                        // formed inside ling_carry

  for (genvar i = 0; i < WIDTH; i++) begin : g_ling
    ling_gp u_gp (
      .g_i   (g[i]),
      .p_i   (p[i]),
      .g_im1 (g_lo[i]),
      .p_im1 (p_lo[i]),
      .gs_i  (gs[i]),
      .ps_i  (ps[i])
    );
  end

  ling_carry u_carry (
    .gs    (gs),
    .ps    (ps),
    .p_msb (p[WIDTH-1]),
    .h     (h),
    .cout  (cout)
  );

  for (genvar i = 0; i < WIDTH; i++) begin : g_sum
    ling_sum u_sum (
      .d_i   (d[i]),
      .p_im1 (p_lo[i]),
      .h_im1 (h_lo[i]),
      .s_i   (s[i])
    );
  end

endmodule
