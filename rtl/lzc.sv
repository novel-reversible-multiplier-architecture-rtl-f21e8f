// lzc: leading-zero count of an N-bit word.
//
// count = number of 0 bits above the most significant 1 of v; N when v is 0.
// Combinational priority scan from the least significant bit upward: the
// last 1 seen sets the count, so the highest 1 wins.
module lzc
  import rev_pkg::*;
#(
  parameter int unsigned N = 4
) (
  input  logic [N-1:0]             v,
  output logic [lzc_bits(N)-1:0]   count
);

  always_comb begin
    count = lzc_bits(N)'(N);
    for (int unsigned i = 0; i < N; i++) begin
      if (v[i]) count = lzc_bits(N)'(N - 1 - i);
    end
  end

endmodule
