// tb_ling_adder4 -- end-to-end self-checking test of the 4-bit Ling adder.
//
// Runs every one of the 256 operand pairs through ling_adder4 with its
// default configuration and compares {cout, s} with the integer sum a + b.
// Beside the result, it counts how often each mechanism of the adder was
// exercised and fails if one never was:
//   - a carry out (the sum leaves the 4-bit range),
//   - H3 set only through its propagate term P*2 & G*1 (a carry that
//     travels across the bit-2/bit-1 pair boundary),
//   - H2 set only through P*1 & G*0,
//   - a sum bit taken from each branch of the sum expansion: the carry
//     into it is 1 (H_{i-1} = 1 and p_{i-1} = 1) and H_{i-1} = 1 but the
//     carry is 0 (p_{i-1} = 0, the case the Ling carry alone gets wrong).
// These counters are computed from the operands, independently of the DUT.
// Timing: combinational; each result is checked one time unit after the operands
// change. A watchdog ends the run with a failure after 10000 time units.
module tb_ling_adder4;
  import ling_pkg::*;

  logic [WIDTH-1:0] a, b, s;
  logic             cout;
  int               checks = 0, failures = 0;
  int               n_cout = 0, n_h3_prop = 0, n_h2_prop = 0;
  int               n_carry_in = 0, n_h_without_carry = 0;

  ling_adder4 dut (.a(a), .b(b), .s(s), .cout(cout));

  initial begin
    for (int unsigned ia = 0; ia < 16; ia++) begin
      for (int unsigned ib = 0; ib < 16; ib++) begin
        int unsigned      total;
        logic [WIDTH-1:0] g, p, h;
        a     = 4'(ia);
        b     = 4'(ib);
        total = ia + ib;
        g     = a & b;
        p     = a | b;
        // Ling carry from arithmetic: H_i = g_i | carry into bit i.
        for (int i = 0; i < WIDTH; i++) begin
          automatic int unsigned m = (1 << i) - 1;
          h[i] = g[i] | (((ia & m) + (ib & m)) >> i != 0);
        end
        if (total > 15) n_cout++;
        if (h[3] && !(g[3] || g[2])) n_h3_prop++;
        if (h[2] && !(g[2] || g[1])) n_h2_prop++;
        for (int i = 1; i < WIDTH; i++) begin
          if (h[i-1] &&  p[i-1]) n_carry_in++;
          if (h[i-1] && !p[i-1]) n_h_without_carry++;
        end
        #1;
        checks++;
        if ({cout, s} !== 5'(total)) begin
          failures++;
          $display("FAIL a=%0d b=%0d got cout=%0b s=%0d exp %0d",
                   ia, ib, cout, s, total);
        end
      end
    end
    checks += 5;
    if (n_cout == 0)            begin failures++; $display("FAIL never: carry out"); end
    if (n_h3_prop == 0)         begin failures++; $display("FAIL never: H3 via P*2&G*1"); end
    if (n_h2_prop == 0)         begin failures++; $display("FAIL never: H2 via P*1&G*0"); end
    if (n_carry_in == 0)        begin failures++; $display("FAIL never: sum with carry in"); end
    if (n_h_without_carry == 0) begin failures++; $display("FAIL never: H=1 without carry"); end
    $display("mechanisms: carry_out=%0d h3_via_propagate=%0d h2_via_propagate=%0d sum_carry_in=%0d sum_h_without_carry=%0d",
             n_cout, n_h3_prop, n_h2_prop, n_carry_in, n_h_without_carry);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #10000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
