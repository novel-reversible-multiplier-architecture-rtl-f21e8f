// adder_shutoff_ctrl: decides from the operands' leading-zero counts which
// adders of the multiplier have work to do.
//
// The leading zeros of x and y give their effective widths wx = N - lzc(x)
// and wy = N - lzc(y). A partial product x_i.y_j can only be 1 when i < wx
// and j < wy. An adder is reported idle (adder_on = 0) when every partial
// product that reaches it, directly or through earlier adders, is forced to 0
// that way; an idle adder could then be switched off without changing the
// product. The switching itself is a power-supply matter and is left to the
// user of the adder_on outputs.
//
//   N = 4 (the 29-gate netlist), adder_on bits:
//     [0] right level-1 adder   x0y1 x1y0 x0y2 x2y0 x0y3 x3y0 x1y3
//     [1] left level-1 adder    x1y1 x1y2 x2y1 x3y1 x2y2 x2y3 x3y2
//     [2] level-2 adder         everything of [0] and [1]
//     [3] column-6 cell         everything of [2], and x3y3
//   other N (the adder tree), one bit per tree node, level 1 first, node k of
//   level l at bit (N - N/2^(l-1)) + k. Node k of level l is fed by rows
//   k*2^l .. (k+1)*2^l - 1, so it is on when x != 0 and k*2^l < wy.
// The counts themselves are outputs too. Combinational.
// Using the two leading-zero counts to switch off unused adders is the
// architecture's proposal; the exact idle rule and the flag order are this
// design's own.
module adder_shutoff_ctrl
  import rev_pkg::*;
#(
  parameter int unsigned N = 4
) (
  input  logic [N-1:0]                   x,
  input  logic [N-1:0]                   y,
  output logic [lzc_bits(N)-1:0]         lzc_x,
  output logic [lzc_bits(N)-1:0]         lzc_y,
  output logic [mult_adder_count(N)-1:0] adder_on
);

  localparam int unsigned CW = lzc_bits(N);

  lzc #(.N(N)) u_lzc_x (.v(x), .count(lzc_x));
  lzc #(.N(N)) u_lzc_y (.v(y), .count(lzc_y));

  logic [CW-1:0] wx, wy;   // effective operand widths

  assign wx = CW'(N) - lzc_x;
  assign wy = CW'(N) - lzc_y;

  // x_i.y_j can be 1 for these operand widths.
  function automatic logic live(input logic [CW-1:0] wxv, input logic [CW-1:0] wyv,
                                input logic [CW-1:0] i, input logic [CW-1:0] j);
    return (i < wxv) && (j < wyv);
  endfunction

  if (N == 4) begin : g_4x4
    logic on_r, on_l;

    always_comb begin
      on_r = live(wx, wy, 0, 1) | live(wx, wy, 1, 0) | live(wx, wy, 0, 2) | live(wx, wy, 2, 0)
           | live(wx, wy, 0, 3) | live(wx, wy, 3, 0) | live(wx, wy, 1, 3);
      on_l = live(wx, wy, 1, 1) | live(wx, wy, 1, 2) | live(wx, wy, 2, 1) | live(wx, wy, 3, 1)
           | live(wx, wy, 2, 2) | live(wx, wy, 2, 3) | live(wx, wy, 3, 2);
    end

    assign adder_on = {on_r | on_l | live(wx, wy, 3, 3), on_r | on_l, on_l, on_r};
  end else begin : g_tree
    for (genvar l = 1; l <= tree_levels(N); l++) begin : g_lvl
      for (genvar k = 0; k < (N >> l); k++) begin : g_node
        assign adder_on[(N - (N >> (l - 1))) + k] = (wx != '0) && (CW'(k << l) < wy);
      end
    end
  end

endmodule
