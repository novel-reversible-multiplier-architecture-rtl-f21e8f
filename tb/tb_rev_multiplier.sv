// tb_rev_multiplier: end-to-end test of the reversible multiplier top level.
//
// The default instance (N = 4, no parameter override) is the 29-gate 4x4
// netlist; it is run over all 256 operand pairs. Two more instances, N = 8
// (all 65536 pairs) and N = 16 (random pairs plus corners), take the
// general adder-tree path. Every product is compared with the integer x * y.
//
// Carry events are counted so that each carry path of the 4x4 netlist is
// shown to be exercised: the carry out of each level-1 adder, the level-2
// carry, and a carry out of the column-6 cell (product bit 7). For the tree
// instances the count of products that reach the top product bit is kept.
// A path that never fires counts as a failure.
//
// The shut-off flags are checked for safety: whenever a 4x4 adder is flagged
// idle, every input it actually receives must be 0. Each of the four adders
// must be flagged idle at least once. For the tree instances the number of
// operand pairs with at least one idle node is counted and must be non-zero,
// and an 8x8 product with y = 1 must flag only the nodes on the path from
// row 0 to the root as busy (y = 0: all idle).
module tb_rev_multiplier;

  import rev_pkg::*;

  int checks = 0, failures = 0;
  int n_carry_r = 0, n_carry_l = 0, n_carry_2 = 0, n_p7 = 0, n_top8 = 0, n_top16 = 0;
  int n_off [4] = '{0, 0, 0, 0};
  int n_off8 = 0, n_off16 = 0;

  logic [3:0]  x,   y;   logic [7:0]  p;   logic [mult_garbage_bits(4)-1:0]  g;
  logic [7:0]  x8,  y8;  logic [15:0] p8;  logic [mult_garbage_bits(8)-1:0]  g8;
  logic [15:0] x16, y16; logic [31:0] p16; logic [mult_garbage_bits(16)-1:0] g16;
  logic [2:0] lx,   ly;    logic [3:0]  on;
  logic [3:0] lx8,  ly8;   logic [6:0]  on8;
  logic [4:0] lx16, ly16;  logic [14:0] on16;

  rev_multiplier dut (.x(x), .y(y), .p(p), .garbage(g), .lzc_x(lx), .lzc_y(ly), .adder_on(on));
  rev_multiplier #(.N(8)) dut8 (.x(x8), .y(y8), .p(p8), .garbage(g8),
                                .lzc_x(lx8), .lzc_y(ly8), .adder_on(on8));
  rev_multiplier #(.N(16)) dut16 (.x(x16), .y(y16), .p(p16), .garbage(g16),
                                  .lzc_x(lx16), .lzc_y(ly16), .adder_on(on16));

  task automatic check(input string tag, input longint unsigned got, input longint unsigned exp);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s got %0d expected %0d", tag, got, exp);
    end
  endtask

  task automatic require(input string what, input int count);
    checks++;
    $display("%s: %0d", what, count);
    if (count == 0) begin
      failures++;
      $display("FAIL %s never happened", what);
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
    check("4x4 garbage width (16 Fredkin + 13 TSG, 2 each)", 64'($bits(g)), 64'(58));

    for (int v = 0; v < 256; v++) begin
      {x, y} = 8'(v);
      #1;
      check("4x4", 64'(p), longint'(x) * longint'(y));
      if (dut.g_4x4.u_mult.r_c) n_carry_r++;
      if (dut.g_4x4.u_mult.l_c) n_carry_l++;
      if (dut.g_4x4.u_mult.m_c) n_carry_2++;
      if (p[7])                 n_p7++;
      // An adder flagged idle must see only zeros.
      checks++;
      if ((!on[0] && (dut.g_4x4.u_mult.r_a != 0 || dut.g_4x4.u_mult.r_b != 0)) ||
          (!on[1] && (dut.g_4x4.u_mult.l_a != 0 || dut.g_4x4.u_mult.l_b != 0)) ||
          (!on[2] && (dut.g_4x4.u_mult.r_s[3:1] != 0 || dut.g_4x4.u_mult.r_c || dut.g_4x4.u_mult.l_s != 0)) ||
          (!on[3] && (x[3] & y[3] || dut.g_4x4.u_mult.l_c || dut.g_4x4.u_mult.m_c))) begin
        failures++;
        $display("FAIL x=%0d y=%0d: adder flagged idle (%b) has a non-zero input", x, y, on);
      end
      for (int a = 0; a < 4; a++) if (!on[a]) n_off[a]++;
    end

    for (int v = 0; v < 65536; v++) begin
      {x8, y8} = 16'(v);
      #1;
      check("8x8", 64'(p8), longint'(x8) * longint'(y8));
      if (p8[15]) n_top8++;
      if (on8 != '1) n_off8++;
      if (y8 < 2 && x8 != 0) begin
        checks++;
        if (on8 != (y8 == 1 ? 7'b1010001 : 7'b0000000)) begin
          failures++;
          $display("FAIL 8x8 x=%0d y=%0d: flags %b", x8, y8, on8);
        end
      end
    end

    for (int t = 0; t < 20000; t++) begin
      case (t)
        0:       begin x16 = '1;    y16 = '1; end
        1:       begin x16 = '0;    y16 = '1; end
        2:       begin x16 = 16'd1; y16 = '1; end
        default: begin x16 = 16'($urandom); y16 = 16'($urandom); end
      endcase
      #1;
      check("16x16", 64'(p16), longint'(x16) * longint'(y16));
      if (p16[31]) n_top16++;
      if (on16 != '1) n_off16++;
    end

    require("4x4 level-1 right adder carry out", n_carry_r);
    require("4x4 level-1 left adder carry out", n_carry_l);
    require("4x4 level-2 adder carry out", n_carry_2);
    require("4x4 carry into product bit 7", n_p7);
    require("8x8 tree product reaching bit 15", n_top8);
    require("16x16 tree product reaching bit 31", n_top16);
    require("4x4 right adder flagged idle", n_off[0]);
    require("4x4 left adder flagged idle", n_off[1]);
    require("4x4 level-2 adder flagged idle", n_off[2]);
    require("4x4 column-6 cell flagged idle", n_off[3]);
    require("8x8 operand pairs with an idle tree node", n_off8);
    require("16x16 operand pairs with an idle tree node", n_off16);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
