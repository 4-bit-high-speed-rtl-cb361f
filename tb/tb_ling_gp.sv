// tb_ling_gp -- exhaustive self-checking test of ling_gp.
//
// Drives all 16 combinations of g_i, p_i, g_{i-1}, p_{i-1} and checks
// G*_i ("either bit of the pair generates") and P*_i ("both bits of the pair
// propagate"), the expected values counted here from the input vector with
// $countones rather than written as the same gates. Timing: combinational,
// checked one time unit after each input change; watchdog after 1000 time units.
module tb_ling_gp;
  logic g_i, p_i, g_im1, p_im1;
  logic gs_i, ps_i;
  int   checks = 0, failures = 0;

  ling_gp dut (.g_i(g_i), .p_i(p_i), .g_im1(g_im1), .p_im1(p_im1),
               .gs_i(gs_i), .ps_i(ps_i));

  initial begin
    for (int v = 0; v < 16; v++) begin
      logic exp_g, exp_p;
      {g_i, p_i, g_im1, p_im1} = 4'(v);
      exp_g = $countones({g_i, g_im1}) >= 1;
      exp_p = $countones({p_i, p_im1}) == 2;
      #1;
      checks += 2;
      if (gs_i !== exp_g) begin
        failures++;
        $display("FAIL G* in=%04b got=%0b exp=%0b", v[3:0], gs_i, exp_g);
      end
      if (ps_i !== exp_p) begin
        failures++;
        $display("FAIL P* in=%04b got=%0b exp=%0b", v[3:0], ps_i, exp_p);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
