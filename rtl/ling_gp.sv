// ling_gp -- Ling generate and Ling propagate for bit position i.
//
//   G*_i = g_i | g_{i-1}
//   P*_i = p_i & p_{i-1}
//
// Each Ling term looks at a pair of adjacent bits, which is what lets the
// Ling carry H_i be built with one fewer logic level than the ordinary
// carry. For bit 0 the neighbour g_{-1}, p_{-1} does not exist and the
// instantiating module ties both inputs to 0, as in the published adder.
//
// Interface: g_i, p_i, g_im1, p_im1 in; gs_i (G*_i), ps_i (P*_i) out.
// Timing: purely combinational, one gate level.
module ling_gp (
  input  logic g_i,
  input  logic p_i,
  input  logic g_im1,
  input  logic p_im1,
  output logic gs_i,
  output logic ps_i
);

  always_comb begin
    gs_i = g_i | g_im1;
    ps_i = p_i & p_im1;
  end

endmodule
