// rev_mult_4x4: 4 x 4 reversible multiplier of 29 gates.
//
// Structure (all combinational, no clock):
//   * 16 Fredkin gates (pp_generator) form every x_i.y_j in one gate delay.
//   * Level 1: two 4-bit TSG parallel adders, each summing two bits per column.
//       right adder R, columns 1..4: (x0y1,x1y0) (x0y2,x2y0) (x0y3,x3y0) (0,x1y3)
//       left adder  L, columns 2..5: (x1y1,0)   (x1y2,x2y1) (x3y1,x2y2) (x2y3,x3y2)
//     Both carry inputs are 0. R's carry lands in column 5, L's in column 6.
//   * Level 2: one 4-bit TSG parallel adder adds R's sums of columns 2..4 and
//     R's carry (column 5) to L's sums of columns 2..5, giving P2..P5.
//   * One more TSG full adder sums column 6: x3y3, L's carry and the level-2
//     carry; its sum is P6 and its carry P7.
//   * P0 = x0y0 and P1 is R's lowest sum bit.
// Gate count: 16 Fredkin + 13 TSG = 29. The bit-to-cell assignment follows
// the published 4x4 netlist; the wires between the two levels are
// reconstructed so that each cell adds bits of equal weight.
// Worst-case delay: 1 Fredkin delay + 4 + 4 + 1 TSG delays.
//
// garbage[31:0]  partial-product gates (pp_generator order)
// garbage[39:32] adder R, garbage[47:40] adder L, garbage[55:48] level 2,
// garbage[57:56] the column-6 cell.
module rev_mult_4x4
  import rev_pkg::*;
(
  input  logic [3:0]                 x,
  input  logic [3:0]                 y,
  output logic [7:0]                 p,
  output logic [M4_GARBAGE_BITS-1:0] garbage
);

  logic [3:0][3:0] pp;   // pp[j][i] = x_i . y_j

  pp_generator #(.N(4)) u_pp (
    .x(x), .y(y), .pp(pp), .garbage(garbage[31:0])
  );

  // ---------------- level 1 ----------------
  logic [3:0] r_a, r_b, r_s, l_a, l_b, l_s;
  logic       r_c, l_c;

  assign r_a = {1'b0,     pp[3][0], pp[2][0], pp[1][0]};   // 0,    x0y3, x0y2, x0y1
  assign r_b = {pp[3][1], pp[0][3], pp[0][2], pp[0][1]};   // x1y3, x3y0, x2y0, x1y0

  assign l_a = {pp[3][2], pp[1][3], pp[2][1], pp[1][1]};   // x2y3, x3y1, x1y2, x1y1
  assign l_b = {pp[2][3], pp[2][2], pp[1][2], 1'b0};       // x3y2, x2y2, x2y1, 0

  rev_parallel_adder #(.W(4)) u_add_r (
    .a(r_a), .b(r_b), .cin(1'b0), .sum(r_s), .cout(r_c), .garbage(garbage[39:32])
  );

  rev_parallel_adder #(.W(4)) u_add_l (
    .a(l_a), .b(l_b), .cin(1'b0), .sum(l_s), .cout(l_c), .garbage(garbage[47:40])
  );

  // ---------------- level 2 ----------------
  logic [3:0] m_s;
  logic       m_c;

  rev_parallel_adder #(.W(4)) u_add_2 (
    .a({r_c, r_s[3:1]}), .b(l_s), .cin(1'b0), .sum(m_s), .cout(m_c), .garbage(garbage[55:48])
  );

  // ---------------- column 6 ----------------
  logic p6, p7;

  tsg_full_adder u_fa_col6 (
    .a(pp[3][3]), .b(l_c), .cin(m_c), .sum(p6), .cout(p7), .garbage(garbage[57:56])
  );

  assign p = {p7, p6, m_s, r_s[0], pp[0][0]};

endmodule
