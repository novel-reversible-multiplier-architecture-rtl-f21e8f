// tb_rev_parallel_adder: checks the TSG ripple-carry parallel adder.
//
// W = 4 (default) over all 512 combinations of a, b and cin; a W = 8 copy
// over 3000 random ones. {cout, sum} must equal the integer a + b + cin and
// the garbage of cell i must be {a[i], a[i] ^ b[i]}.
module tb_rev_parallel_adder;

  int checks = 0, failures = 0;

  logic [3:0] a4, b4, s4;
  logic       ci4, co4;
  logic [7:0] g4;
  logic [7:0] a8, b8, s8;
  logic       ci8, co8;
  logic [15:0] g8;

  rev_parallel_adder          dut4 (.a(a4), .b(b4), .cin(ci4), .sum(s4), .cout(co4), .garbage(g4));
  rev_parallel_adder #(.W(8)) dut8 (.a(a8), .b(b8), .cin(ci8), .sum(s8), .cout(co8), .garbage(g8));

  initial begin : watchdog
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int v = 0; v < 512; v++) begin
      {ci4, a4, b4} = 9'(v);
      #1;
      checks++;
      if ({co4, s4} !== 5'(int'(a4) + int'(b4) + int'(ci4))) begin
        failures++;
        $display("FAIL W=4 %0d+%0d+%0d = %0d", a4, b4, ci4, {co4, s4});
      end
      for (int i = 0; i < 4; i++) begin
        checks++;
        if (g4[2*i +: 2] !== {a4[i], a4[i] ^ b4[i]}) begin
          failures++;
          $display("FAIL W=4 garbage cell %0d", i);
        end
      end
    end
    for (int t = 0; t < 3000; t++) begin
      a8  = 8'($urandom);
      b8  = 8'($urandom);
      ci8 = 1'($urandom);
      #1;
      checks++;
      if ({co8, s8} !== 9'(int'(a8) + int'(b8) + int'(ci8))) begin
        failures++;
        $display("FAIL W=8 %0d+%0d+%0d = %0d", a8, b8, ci8, {co8, s8});
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
