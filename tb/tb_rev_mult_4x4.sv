// tb_rev_mult_4x4: exhaustive check of the 29-gate 4x4 multiplier.
//
// All 256 operand pairs. The product must equal the integer x * y. The
// partial-product part of the garbage port must hold {x_i, !x_i & y_j} per
// gate, and the garbage of the column-6 cell must be {x3y3, x3y3 ^ c} for
// some carry c, i.e. its top bit is x3 & y3.
module tb_rev_mult_4x4;

  int checks = 0, failures = 0;

  logic [3:0]  x, y;
  logic [7:0]  p;
  logic [57:0] garbage;

  rev_mult_4x4 dut (.*);

  initial begin : watchdog
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
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
            $display("FAIL pp garbage gate (%0d,%0d)", i, j);
          end
        end
      checks++;
      if (garbage[57] !== (x[3] & y[3])) begin
        failures++;
        $display("FAIL column-6 cell input A for x=%0d y=%0d", x, y);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
