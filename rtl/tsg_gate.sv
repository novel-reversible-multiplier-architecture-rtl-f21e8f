// tsg_gate: the 4x4 reversible TSG gate.
//
// Four inputs map one-to-one onto four outputs:
//   P = A
//   Q = A'C' ^ B'
//   R = Q ^ D
//   S = Q.D ^ (A.B ^ C)
// The equations are the gate's published definition. With C = 0 the gate is a
// full adder (see tsg_full_adder). Purely combinational, one gate delay; no
// clock or reset.
module tsg_gate (
  input  logic a,
  input  logic b,
  input  logic c,
  input  logic d,
  output logic p,
  output logic q,
  output logic r,
  output logic s
);

  always_comb begin
    p = a;
    q = (~a & ~c) ^ ~b;
    r = q ^ d;
    s = (q & d) ^ ((a & b) ^ c);
  end

endmodule
