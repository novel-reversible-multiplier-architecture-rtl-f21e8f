// rev_pkg: sizes shared by the reversible multiplier modules.
//
// The multipliers bring every garbage output of every reversible gate out on
// one flat port, so that gate and garbage counts can be checked. These
// functions give the width of that port and the offset of each gate group in
// it. Counting rules:
//   * a Fredkin gate used as an AND (inputs x, y, 0) leaves 2 garbage bits;
//   * a TSG gate used as a full adder (inputs a, b, 0, cin) leaves 2 garbage bits;
//   * in the N x N tree, every node at level 2 and above also leaves the carry
//     out of its top cell, which is always 0 (1 bit).
// The 4x4 netlist uses 16 Fredkin gates and 13 TSG gates (29 gates in all),
// the count the 4x4 design is quoted with.
package rev_pkg;

  localparam int unsigned GBITS_PER_FREDKIN = 2;
  localparam int unsigned GBITS_PER_TSG     = 2;

  localparam int unsigned M4_FREDKIN_GATES = 16;
  localparam int unsigned M4_TSG_GATES     = 13;
  localparam int unsigned M4_GARBAGE_BITS  =
      GBITS_PER_FREDKIN * M4_FREDKIN_GATES + GBITS_PER_TSG * M4_TSG_GATES;  // 58

  // Number of levels of the addition tree: log2(n).
  function automatic int unsigned tree_levels(input int unsigned n);
    return $clog2(n);
  endfunction

  // TSG full-adder cells in one node of level l of the tree for n-bit operands:
  // an n-bit parallel adder, plus at level 2 and above 2^(l-1) cells that carry
  // the adder's carry through the upper bits of the higher partial sum.
  function automatic int unsigned tree_node_cells(input int unsigned n, input int unsigned l);
    return (l <= 1) ? n : n + (1 << (l - 1));
  endfunction

  // Garbage bits of one node of level l.
  function automatic int unsigned tree_node_gbits(input int unsigned n, input int unsigned l);
    return GBITS_PER_TSG * tree_node_cells(n, l) + ((l >= 2) ? 1 : 0);
  endfunction

  // Garbage bits of all tree nodes on levels 1 .. l-1.
  function automatic int unsigned tree_gbits_before(input int unsigned n, input int unsigned l);
    int unsigned acc = 0;
    for (int unsigned m = 1; m < l; m++) acc += (n >> m) * tree_node_gbits(n, m);
    return acc;
  endfunction

  // Total TSG cells of the whole tree.
  function automatic int unsigned tree_tsg_cells(input int unsigned n);
    int unsigned acc = 0;
    for (int unsigned m = 1; m <= tree_levels(n); m++) acc += (n >> m) * tree_node_cells(n, m);
    return acc;
  endfunction

  // Width of the tree multiplier's garbage port: partial-product gates first,
  // then the adder levels in order.
  function automatic int unsigned tree_garbage_bits(input int unsigned n);
    return GBITS_PER_FREDKIN * n * n + tree_gbits_before(n, tree_levels(n) + 1);
  endfunction

  // Width of the top-level garbage port: the 4x4 netlist for n = 4, the tree otherwise.
  function automatic int unsigned mult_garbage_bits(input int unsigned n);
    return (n == 4) ? M4_GARBAGE_BITS : tree_garbage_bits(n);
  endfunction

  // Adders the shut-off control reports on: for n = 4 the netlist's right
  // and left level-1 adders, the level-2 adder and the column-6 cell; for the
  // tree one per node, n - 1 in all.
  function automatic int unsigned mult_adder_count(input int unsigned n);
    return (n == 4) ? 4 : n - 1;
  endfunction

  // Width of a leading-zero count of an n-bit operand (0 .. n).
  function automatic int unsigned lzc_bits(input int unsigned n);
    return $clog2(n + 1);
  endfunction

endpackage
