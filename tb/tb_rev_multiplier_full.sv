// tb_rev_multiplier_full: the top level at its default size, end to end.
//
// rev_multiplier is instantiated with no parameter override, so N = 4 and the
// 29-gate netlist is used. Every one of the 256 operand pairs is applied and
// the 8-bit product compared with the integer x * y. The garbage port must be
// 58 bits wide (16 Fredkin and 13 TSG gates, two garbage outputs each), and
// the Fredkin part of it must read {x_i, !x_i & y_j} for each gate. The carry
// into product bit 7 must occur at least once. The leading-zero counts are
// checked against a scan of the operands, and the adder shut-off flags must
// mark at least one adder idle for some operand pair.
module tb_rev_multiplier_full;

  int checks = 0, failures = 0, n_p7 = 0, n_idle = 0;

  logic [3:0]  x, y;
  logic [7:0]  p;
  logic [57:0] garbage;
  logic [2:0]  lzc_x, lzc_y;
  logic [3:0]  adder_on;

  function automatic int ref_lzc(input logic [3:0] v);
    int c = 0;
    for (int b = 3; b >= 0; b--) begin
      if (v[b]) break;
      c++;
    end
    return c;
  endfunction

  rev_multiplier dut (.*);

  initial begin : watchdog
    #100000;
    failures++;
    $display("watchdog expired");
    checks++;
    if (n_idle == 0) begin
      failures++;
      $display("FAIL no adder was ever flagged idle");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    checks++;
    if ($bits(dut.garbage) != 58) begin
      failures++;
      $display("FAIL garbage width %0d", $bits(dut.garbage));
    end
    for (int v = 0; v < 256; v++) begin
      {x, y} = 8'(v);
      #1;
      checks++;
      if (p !== 8'(int'(x) * int'(y))) begin
        failures++;
        $display("FAIL %0d * %0d = %0d", x, y, p);
      end
      for (int j = 0; j < 4; j++)
        for (int i = 0; i < 4; i++) begin
          checks++;
          if (garbage[2*(j*4+i) +: 2] !== {x[i], !x[i] && y[j]}) begin
            failures++;
            $display("FAIL Fredkin garbage (%0d,%0d)", i, j);
          end
        end
      if (p[7]) n_p7++;
      if (adder_on != 4'b1111) n_idle++;
      checks++;
      if (int'(lzc_x) != ref_lzc(x) || int'(lzc_y) != ref_lzc(y)) begin
        failures++;
        $display("FAIL leading-zero counts %0d %0d for x=%0d y=%0d", lzc_x, lzc_y, x, y);
      end
    end
    checks++;
    if (n_p7 == 0) begin
      failures++;
      $display("FAIL carry into product bit 7 never happened");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
