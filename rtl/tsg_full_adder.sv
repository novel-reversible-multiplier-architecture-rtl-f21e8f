// tsg_full_adder: a reversible full adder built from a single TSG gate.
//
// The gate's third input is tied to 0, which turns its outputs into
//   P = a              (garbage)
//   Q = a ^ b          (garbage)
//   R = a ^ b ^ cin    (sum)
//   S = (a ^ b).cin ^ a.b (carry out)
// so one gate and two garbage outputs make a full adder. The garbage outputs
// are kept on a port, {P, Q}, rather than dropped. Combinational.
module tsg_full_adder (
  input  logic       a,
  input  logic       b,
  input  logic       cin,
  output logic       sum,
  output logic       cout,
  output logic [1:0] garbage
);

  logic g_p, g_q;

  tsg_gate u_tsg (
    .a(a), .b(b), .c(1'b0), .d(cin),
    .p(g_p), .q(g_q), .r(sum), .s(cout)
  );

  assign garbage = {g_p, g_q};

endmodule
