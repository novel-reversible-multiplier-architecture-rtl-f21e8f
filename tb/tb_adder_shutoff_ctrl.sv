// tb_adder_shutoff_ctrl: checks the leading-zero counts and the idle-adder
// flags.
//
// Reference model: count leading zeros by scanning down from the top bit;
// build the widest operands with the same counts (all ones below the top 1);
// an adder is on when any partial product it receives is 1 for those
// operands. N = 4 uses the bit lists of the 29-gate netlist's adders; an
// N = 8 copy uses the tree's rows, and both are run over every operand pair.
module tb_adder_shutoff_ctrl;

  int checks = 0, failures = 0;

  logic [3:0] x4, y4;  logic [2:0] lx4, ly4;  logic [3:0] on4;
  logic [7:0] x8, y8;  logic [3:0] lx8, ly8;  logic [6:0] on8;

  adder_shutoff_ctrl          dut4 (.x(x4), .y(y4), .lzc_x(lx4), .lzc_y(ly4), .adder_on(on4));
  adder_shutoff_ctrl #(.N(8)) dut8 (.x(x8), .y(y8), .lzc_x(lx8), .lzc_y(ly8), .adder_on(on8));

  // Partial products (i, j) = x_i.y_j wired into the netlist's two level-1 adders.
  int r_set [7][2] = '{'{0,1}, '{1,0}, '{0,2}, '{2,0}, '{0,3}, '{3,0}, '{1,3}};
  int l_set [7][2] = '{'{1,1}, '{1,2}, '{2,1}, '{3,1}, '{2,2}, '{2,3}, '{3,2}};

  function automatic int ref_lzc(input int v, input int n);
    int c = 0;
    for (int b = n - 1; b >= 0; b--) begin
      if (((v >> b) & 1) != 0) break;
      c++;
    end
    return c;
  endfunction

  function automatic int widest(input int v, input int n);
    return (1 << (n - ref_lzc(v, n))) - 1;
  endfunction

  task automatic expect_eq(input string tag, input int got, input int exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s got %0d expected %0d", tag, got, exp);
    end
  endtask

  initial begin : watchdog
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int v = 0; v < 256; v++) begin
      int xm, ym, r_on, l_on, f_on;
      {x4, y4} = 8'(v);
      #1;
      expect_eq("N=4 lzc_x", int'(lx4), ref_lzc(int'(x4), 4));
      expect_eq("N=4 lzc_y", int'(ly4), ref_lzc(int'(y4), 4));
      xm = widest(int'(x4), 4);
      ym = widest(int'(y4), 4);
      r_on = 0; l_on = 0;
      for (int e = 0; e < 7; e++) begin
        if (((xm >> r_set[e][0]) & (ym >> r_set[e][1]) & 1) != 0) r_on = 1;
        if (((xm >> l_set[e][0]) & (ym >> l_set[e][1]) & 1) != 0) l_on = 1;
      end
      f_on = r_on | l_on | ((xm >> 3) & (ym >> 3) & 1);
      expect_eq("N=4 right adder", int'(on4[0]), r_on);
      expect_eq("N=4 left adder", int'(on4[1]), l_on);
      expect_eq("N=4 level-2 adder", int'(on4[2]), r_on | l_on);
      expect_eq("N=4 column-6 cell", int'(on4[3]), f_on);
    end

    for (int v = 0; v < 65536; v++) begin
      int xm, ym, idx;
      {x8, y8} = 16'(v);
      #1;
      expect_eq("N=8 lzc_x", int'(lx8), ref_lzc(int'(x8), 8));
      expect_eq("N=8 lzc_y", int'(ly8), ref_lzc(int'(y8), 8));
      xm = widest(int'(x8), 8);
      ym = widest(int'(y8), 8);
      idx = 0;
      for (int l = 1; l <= 3; l++)
        for (int k = 0; k < (8 >> l); k++) begin
          int on;
          on = 0;
          for (int j = k << l; j < (k + 1) << l; j++)
            if (xm != 0 && ((ym >> j) & 1) != 0) on = 1;
          expect_eq($sformatf("N=8 node %0d.%0d", l, k), int'(on8[idx]), on);
          idx++;
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
