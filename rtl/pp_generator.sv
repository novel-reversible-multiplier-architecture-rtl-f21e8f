// pp_generator: all N*N partial-product bits of an N x N multiply at once.
//
// One Fredkin gate per bit x_i.y_j, with x_i on the control input, y_j on B
// and constant 0 on C; its R output is x_i.y_j. All gates work in parallel,
// so every partial product is ready after a single gate delay.
//   pp[j][i]      = x_i . y_j   (row j is x times multiplier bit y_j)
//   garbage bits  = {x_i, x_i'.y_j} for gate (i, j), at [2*(j*N+i) +: 2]
// The x and y lines fan out to the N gates that use them, as in the published
// partial-product circuit; a strictly fan-out-free reversible circuit would
// need copy gates there, which are not part of this design.
module pp_generator #(
  parameter int unsigned N = 4
) (
  input  logic [N-1:0]          x,
  input  logic [N-1:0]          y,
  output logic [N-1:0][N-1:0]   pp,
  output logic [2*N*N-1:0]      garbage
);

  for (genvar j = 0; j < N; j++) begin : g_row
    for (genvar i = 0; i < N; i++) begin : g_col
      fredkin_gate u_f (
        .a(x[i]), .b(y[j]), .c(1'b0),
        .p(garbage[2*(j*N+i)+1]), .q(garbage[2*(j*N+i)]), .r(pp[j][i])
      );
    end
  end

endmodule
