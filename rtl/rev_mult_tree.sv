// rev_mult_tree: N x N reversible multiplier as a binary tree of adders.
//
// N must be a power of two (N >= 2). Unsigned operands, 2N-bit product,
// purely combinational.
//
//   Level 0: N partial-product rows from Fredkin gates, row j = x . y_j,
//            weight 2^j, all formed at once (pp_generator).
//   Level l: node k adds partial sums A = S[l-1][2k] and B = S[l-1][2k+1],
//            where B weighs h = 2^(l-1) places more than A. The low h bits of
//            A pass straight through; an N-bit TSG parallel adder adds A's next
//            N bits to B's low N bits. At level 1 A is a single row, so its top
//            adder bit is 0 and the adder's carry is the top bit of the sum
//            (N+2 bits). From level 2 on, B is N+h bits wide: its upper h bits
//            and the adder's carry go through a further chain of h TSG full
//            adders with a 0 second operand. The node's sum is N+2^l bits; the
//            carry out of that chain is always 0 and is kept as garbage.
//   The root at level log2(N) is the 2N-bit product.
// Each level halves the number of partial sums, so there are log2(N) adder
// levels. The pairwise tree and the N-bit adders follow the architecture;
// the carry chain over the upper bits is this design's completion of it.
//
// Garbage port layout: the 2*N*N partial-product bits first (pp_generator
// order), then for each level from 1 up, node by node, the node's adder
// garbage, then (level 2 and up) its upper-chain garbage and the 0 carry.
module rev_mult_tree
  import rev_pkg::*;
#(
  parameter int unsigned N = 4
) (
  input  logic [N-1:0]                    x,
  input  logic [N-1:0]                    y,
  output logic [2*N-1:0]                  p,
  output logic [tree_garbage_bits(N)-1:0] garbage
);

  localparam int unsigned L   = tree_levels(N);
  localparam int unsigned PPG = 2 * N * N;

  if (N < 2 || (N & (N - 1)) != 0) begin : g_bad_n
    $error("rev_mult_tree: N must be a power of two, at least 2");
  end

  logic [N-1:0][N-1:0] pp;

  pp_generator #(.N(N)) u_pp (
    .x(x), .y(y), .pp(pp), .garbage(garbage[PPG-1:0])
  );

  // Partial sums of each level, exactly as wide as they need to be:
  // level l holds N >> l sums of W_OUT = N + 2^l bits (level 0: the rows).
  for (genvar l = 1; l <= L; l++) begin : g_lvl
    localparam int unsigned H     = 1 << (l - 1);           // shift of B against A
    localparam int unsigned W_IN  = (l == 1) ? N : N + H;   // width of the sums added
    localparam int unsigned W_OUT = N + (1 << l);           // width of this level's sums

    logic [W_OUT-1:0] sums [N >> l];

    for (genvar k = 0; k < (N >> l); k++) begin : g_node
      localparam int unsigned GOFF = PPG + tree_gbits_before(N, l) + k * tree_node_gbits(N, l);

      logic [N+H-1:0] a;    // lower-weight operand, zero-extended at level 1
      logic [W_IN-1:0] b;   // higher-weight operand, weighs 2^H more
      logic [N-1:0]   s_main;
      logic           c_main;
      logic [W_OUT-1:0] node_sum;

      if (l == 1) begin : g_rows
        assign a = (N+H)'(pp[2*k]);
        assign b = pp[2*k+1];
      end else begin : g_sums
        assign a = g_lvl[l-1].sums[2*k];
        assign b = g_lvl[l-1].sums[2*k+1];
      end

      rev_parallel_adder #(.W(N)) u_add (
        .a(a[H +: N]), .b(b[N-1:0]), .cin(1'b0),
        .sum(s_main), .cout(c_main), .garbage(garbage[GOFF +: 2*N])
      );

      if (l == 1) begin : g_first
        // A row has only N bits, so A[N] (top adder input) is 0 and the
        // carry is bit N+1 of the sum.
        assign node_sum = {c_main, s_main, a[0]};
      end else begin : g_upper
        logic [H-1:0] s_up;

        rev_parallel_adder #(.W(H)) u_up (
          .a(b[N +: H]), .b({H{1'b0}}), .cin(c_main),
          .sum(s_up), .cout(garbage[GOFF + 2*N + 2*H]), .garbage(garbage[GOFF + 2*N +: 2*H])
        );

        assign node_sum = {s_up, s_main, a[H-1:0]};
      end

      assign sums[k] = node_sum;
    end
  end

  assign p = g_lvl[L].sums[0];

endmodule
