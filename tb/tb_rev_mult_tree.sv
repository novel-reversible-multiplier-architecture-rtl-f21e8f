// tb_rev_mult_tree: checks the N x N tree multiplier at several sizes.
//
// N = 2, 4 and 8 are run over every operand pair; N = 16 and N = 32 over
// random pairs plus the corner values (0, 1, all ones). The product must
// equal the integer x * y. The garbage port width must match
// rev_pkg::tree_garbage_bits, and the top carry of the root node, which the
// tree keeps as garbage, must always be 0.
module tb_rev_mult_tree;

  import rev_pkg::*;

  int checks = 0, failures = 0;

  logic [1:0]  x2,  y2;  logic [3:0]  p2;  logic [tree_garbage_bits(2)-1:0]  g2;
  logic [3:0]  x4,  y4;  logic [7:0]  p4;  logic [tree_garbage_bits(4)-1:0]  g4;
  logic [7:0]  x8,  y8;  logic [15:0] p8;  logic [tree_garbage_bits(8)-1:0]  g8;
  logic [15:0] x16, y16; logic [31:0] p16; logic [tree_garbage_bits(16)-1:0] g16;
  logic [31:0] x32, y32; logic [63:0] p32; logic [tree_garbage_bits(32)-1:0] g32;

  rev_mult_tree #(.N(2))  dut2  (.x(x2),  .y(y2),  .p(p2),  .garbage(g2));
  rev_mult_tree           dut4  (.x(x4),  .y(y4),  .p(p4),  .garbage(g4));
  rev_mult_tree #(.N(8))  dut8  (.x(x8),  .y(y8),  .p(p8),  .garbage(g8));
  rev_mult_tree #(.N(16)) dut16 (.x(x16), .y(y16), .p(p16), .garbage(g16));
  rev_mult_tree #(.N(32)) dut32 (.x(x32), .y(y32), .p(p32), .garbage(g32));

  task automatic check(input string tag, input longint unsigned got, input longint unsigned exp);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s got %0d expected %0d", tag, got, exp);
    end
  endtask

  initial begin : watchdog
    #10000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // Garbage widths against hand counts: N=2: 8 + 2*2 = 12;
    // N=4: 32 + 2*(2*4) + (2*6 + 1) = 61.
    check("N=2 garbage width", 64'($bits(g2)), 64'(12));
    check("N=4 garbage width", 64'($bits(g4)), 64'(61));

    for (int v = 0; v < 16; v++) begin
      {x2, y2} = 4'(v); #1;
      check("N=2", 64'(p2), longint'(x2) * longint'(y2));
    end
    for (int v = 0; v < 256; v++) begin
      {x4, y4} = 8'(v); #1;
      check("N=4", 64'(p4), longint'(x4) * longint'(y4));
      check("N=4 root carry", 64'(g4[$bits(g4)-1]), 64'(0));
    end
    for (int v = 0; v < 65536; v++) begin
      {x8, y8} = 16'(v); #1;
      check("N=8", 64'(p8), longint'(x8) * longint'(y8));
    end
    for (int t = 0; t < 5000; t++) begin
      case (t)
        0: begin x16 = '0; y16 = '1; x32 = '1; y32 = '0; end
        1: begin x16 = '1; y16 = '1; x32 = '1; y32 = '1; end
        2: begin x16 = 16'd1; y16 = '1; x32 = 32'd1; y32 = '1; end
        default: begin
          x16 = 16'($urandom); y16 = 16'($urandom);
          x32 = $urandom;      y32 = $urandom;
        end
      endcase
      #1;
      check("N=16", 64'(p16), longint'(x16) * longint'(y16));
      check("N=32", 64'(p32), longint'(x32) * longint'(y32));
      check("N=32 root carry", 64'(g32[$bits(g32)-1]), 64'(0));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
