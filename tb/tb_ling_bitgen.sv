// tb_ling_bitgen -- exhaustive self-checking test of ling_bitgen.
//
// Applies all four (a_i, b_i) pairs and compares d, g, p with the truth table
// of the half-sum, generate and propagate, computed here from the integer
// sum a_i + b_i: g is its carry, d its low bit, p is "sum is not zero".
// Timing: the block is combinational; each check is taken one time unit after the
// inputs change. A watchdog ends the run with a failure after 1000 time units.
module tb_ling_bitgen;
  import ling_pkg::*;

  logic    a_i, b_i;
  bitgen_t bits;
  int      checks = 0, failures = 0;

  ling_bitgen dut (.a_i(a_i), .b_i(b_i), .bits(bits));

  task automatic check(input string what, input logic got, input logic exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s a=%0b b=%0b got=%0b exp=%0b", what, a_i, b_i, got, exp);
    end
  endtask

  initial begin
    for (int v = 0; v < 4; v++) begin
      int unsigned sum;
      {a_i, b_i} = 2'(v);
      sum = int'(a_i) + int'(b_i);
      #1;
      check("d", bits.d, sum[0]);
      check("g", bits.g, sum[1]);
      check("p", bits.p, sum != 0);
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
