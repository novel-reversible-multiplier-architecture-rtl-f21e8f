// rev_parallel_adder: W-bit reversible parallel adder of TSG full adders.
//
// W tsg_full_adder cells in a ripple chain: cell i adds a[i], b[i] and the
// carry of cell i-1 (cin for cell 0); the carry of cell W-1 is cout. Each
// cell leaves two garbage bits, found at garbage[2*i +: 2] = {a[i], a[i]^b[i]}.
// Worst-case delay is W TSG gate delays. The ripple chain is how the 4-bit
// parallel adders of the 4x4 multiplier are drawn; faster reversible adders
// could be dropped in with the same ports.
module rev_parallel_adder #(
  parameter int unsigned W = 4
) (
  input  logic [W-1:0]   a,
  input  logic [W-1:0]   b,
  input  logic           cin,
  output logic [W-1:0]   sum,
  output logic           cout,
  output logic [2*W-1:0] garbage
);

  logic [W:0] carry;

  assign carry[0] = cin;

  for (genvar i = 0; i < W; i++) begin : g_cell
    tsg_full_adder u_fa (
      .a(a[i]), .b(b[i]), .cin(carry[i]),
      .sum(sum[i]), .cout(carry[i+1]), .garbage(garbage[2*i +: 2])
    );
  end

  assign cout = carry[W];

endmodule
