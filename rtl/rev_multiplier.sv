// rev_multiplier: top level of the reversible N x N multiplier.
//
// Unsigned x times y gives the 2N-bit product p, combinationally, built only
// from reversible gates: Fredkin gates form the partial products and TSG
// gates, each acting as one full adder, add them. Every gate's garbage
// outputs are brought out on `garbage` (width rev_pkg::mult_garbage_bits(N)).
//
//   N = 4 (default): the 29-gate 4x4 netlist (rev_mult_4x4).
//   other N, a power of two: the binary adder tree with log2(N) levels of
//   N-bit TSG parallel adders (rev_mult_tree).
// Picking the hand-drawn netlist for N = 4 and the general tree otherwise is
// this design's choice; both compute the same product.
//
// adder_shutoff_ctrl runs beside the datapath: from the leading-zero counts
// of x and y it flags, on adder_on, each adder whose inputs are all forced to
// 0 for these operands (0 = idle, may be switched off). The bit order is
// given in adder_shutoff_ctrl. The switches are not part of this RTL; the
// datapath always computes.
// No clock, reset or handshake: the product settles after one Fredkin gate
// delay plus the TSG ripple delays of the adder levels.
module rev_multiplier
  import rev_pkg::*;
#(
  parameter int unsigned N = 4
) (
  input  logic [N-1:0]                    x,
  input  logic [N-1:0]                    y,
  output logic [2*N-1:0]                  p,
  output logic [mult_garbage_bits(N)-1:0] garbage,
  output logic [lzc_bits(N)-1:0]          lzc_x,
  output logic [lzc_bits(N)-1:0]          lzc_y,
  output logic [mult_adder_count(N)-1:0]  adder_on
);

  adder_shutoff_ctrl #(.N(N)) u_ctrl (
    .x(x), .y(y), .lzc_x(lzc_x), .lzc_y(lzc_y), .adder_on(adder_on)
  );

  if (N == 4) begin : g_4x4
    rev_mult_4x4 u_mult (.x(x), .y(y), .p(p), .garbage(garbage));
  end else begin : g_tree
    rev_mult_tree #(.N(N)) u_mult (.x(x), .y(y), .p(p), .garbage(garbage));
  end

endmodule
