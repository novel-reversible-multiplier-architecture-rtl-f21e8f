// tb_fredkin_gate: exhaustive check of the Fredkin gate.
//
// Expected behaviour: A passes through; B and C are swapped when A is 1 and
// pass straight when A is 0. All 8 inputs are applied, and the 8 outputs are
// checked to be all different (reversibility). With C = 0, R must be A.B.
module tb_fredkin_gate;

  logic a, b, c, p, q, r;
  int   checks = 0, failures = 0;
  bit   seen [8];

  fredkin_gate dut (.*);

  initial begin : watchdog
    #10000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    foreach (seen[i]) seen[i] = 1'b0;
    for (int v = 0; v < 8; v++) begin
      logic [2:0] exp_out;
      {a, b, c} = 3'(v);
      #1;
      exp_out = a ? {a, c, b} : {a, b, c};
      checks++;
      if ({p, q, r} !== exp_out) begin
        failures++;
        $display("FAIL in=%b%b%b out=%b%b%b exp=%b", a, b, c, p, q, r, exp_out);
      end
      checks++;
      if (seen[{p, q, r}]) begin
        failures++;
        $display("FAIL output %b repeats", {p, q, r});
      end
      seen[{p, q, r}] = 1'b1;
      if (!c) begin
        checks++;
        if (r !== (a & b)) begin
          failures++;
          $display("FAIL AND use: a=%b b=%b r=%b", a, b, r);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
