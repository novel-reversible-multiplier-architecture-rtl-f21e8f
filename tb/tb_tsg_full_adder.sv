// tb_tsg_full_adder: exhaustive check of the one-gate TSG full adder.
//
// For all 8 inputs, {cout, sum} must equal the integer a + b + cin, and the
// garbage outputs must be {a, a ^ b}.
module tb_tsg_full_adder;

  logic       a, b, cin, sum, cout;
  logic [1:0] garbage;
  int         checks = 0, failures = 0;

  tsg_full_adder dut (.*);

  initial begin : watchdog
    #10000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int v = 0; v < 8; v++) begin
      int total;
      {a, b, cin} = 3'(v);
      #1;
      total = int'(a) + int'(b) + int'(cin);
      checks++;
      if ({cout, sum} !== 2'(total)) begin
        failures++;
        $display("FAIL a=%b b=%b cin=%b -> cout=%b sum=%b", a, b, cin, cout, sum);
      end
      checks++;
      if (garbage !== {a, a != b}) begin
        failures++;
        $display("FAIL garbage %b for a=%b b=%b", garbage, a, b);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
