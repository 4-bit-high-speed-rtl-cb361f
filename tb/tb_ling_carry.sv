// tb_ling_carry -- self-checking test of ling_carry over all 256 operand pairs.
//
// For each 4-bit a, b the testbench forms the G*/P* inputs the adder would
// give the block, and checks the outputs against values taken from integer
// addition, not from the Ling equations: the carry into bit i is
// c_i = ((a mod 2^i) + (b mod 2^i)) >> i, the expected Ling carry is
// H_i = g_i | c_i, and the expected carry out is bit 4 of a + b.
// Timing: combinational, checked one time unit after each input change; watchdog after 10000 time units.
module tb_ling_carry;
  import ling_pkg::*;

  logic [WIDTH-1:0] gs, ps, h;
  logic             p_msb, cout;
  int               checks = 0, failures = 0;

  ling_carry dut (.gs(gs), .ps(ps), .p_msb(p_msb), .h(h), .cout(cout));

  initial begin
    for (int unsigned a = 0; a < 16; a++) begin
      for (int unsigned b = 0; b < 16; b++) begin
        logic [WIDTH-1:0] g, p, exp_h;
        logic             exp_c;
        g = 4'(a & b);
        p = 4'(a | b);
        gs = g | {g[WIDTH-2:0], 1'b0};
        ps = p & {p[WIDTH-2:0], 1'b0};
        p_msb = p[WIDTH-1];
        for (int i = 0; i < WIDTH; i++) begin
          automatic int unsigned m = (1 << i) - 1;
          exp_h[i] = g[i] | (((a & m) + (b & m)) >> i != 0);
        end
        exp_c = ((a + b) >> WIDTH) != 0;
        #1;
        checks += 2;
        if (h !== exp_h) begin
          failures++;
          $display("FAIL H a=%0d b=%0d got=%04b exp=%04b", a, b, h, exp_h);
        end
        if (cout !== exp_c) begin
          failures++;
          $display("FAIL cout a=%0d b=%0d got=%0b exp=%0b", a, b, cout, exp_c);
        end
      end
    end
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
