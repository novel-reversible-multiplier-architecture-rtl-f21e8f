// tb_tsg_gate: exhaustive check of the TSG gate.
//
// All 16 input patterns are applied. The expected outputs come from a truth
// table built here from the gate's definition written as a case analysis on
// (A, C) rather than as the XOR equations the module uses:
//   A=0,C=0: Q = 1^B' = B      A=0,C=1 or A=1: Q = B'
// and S is C ^ A.B, flipped when Q.D. The testbench also checks that the 16
// output patterns are all different, i.e. that the gate is reversible.
module tb_tsg_gate;

  logic a, b, c, d, p, q, r, s;
  int   checks = 0, failures = 0;
  bit   seen [16];

  tsg_gate dut (.*);

  initial begin : watchdog
    #10000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic eq, er, es;
    foreach (seen[i]) seen[i] = 1'b0;
    for (int v = 0; v < 16; v++) begin
      {a, b, c, d} = 4'(v);
      #1;
      if (!a && !c) eq = b; else eq = !b;
      er = d ? !eq : eq;
      es = c ^ (a && b);
      if (eq && d) es = !es;
      checks++;
      if ({p, q, r, s} !== {a, eq, er, es}) begin
        failures++;
        $display("FAIL in=%b%b%b%b out=%b%b%b%b exp=%b%b%b%b", a, b, c, d, p, q, r, s, a, eq, er, es);
      end
      checks++;
      if (seen[{p, q, r, s}]) begin
        failures++;
        $display("FAIL output %b repeats: gate not reversible", {p, q, r, s});
      end
      seen[{p, q, r, s}] = 1'b1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
