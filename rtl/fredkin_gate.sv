// fredkin_gate: the 3x3 reversible Fredkin (controlled-swap) gate.
//
//   P = A
//   Q = A'.B + A.C
//   R = A'.C + A.B
// When A is 1 the B and C lines are swapped, otherwise they pass straight.
// With C = 0 the R output is A.B and Q is A'.B, which is how the multiplier
// uses it to form partial products. The definition is the standard one for
// this gate. Combinational, one gate delay.
module fredkin_gate (
  input  logic a,
  input  logic b,
  input  logic c,
  output logic p,
  output logic q,
  output logic r
);

  always_comb begin
    p = a;
    q = (~a & b) | (a & c);
    r = (~a & c) | (a & b);
  end

endmodule
