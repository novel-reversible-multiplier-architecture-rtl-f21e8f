// tb_pp_generator: checks the Fredkin partial-product array.
//
// N = 4 (default) is run over all 256 operand pairs; an N = 8 copy gets 2000
// random pairs. Each row j must equal y_j ? x : 0, and each gate's garbage
// pair must be {x_i, !x_i & y_j}.
module tb_pp_generator;

  int checks = 0, failures = 0;

  logic [3:0]        x4, y4;
  logic [3:0][3:0]   pp4;
  logic [31:0]       g4;
  logic [7:0]        x8, y8;
  logic [7:0][7:0]   pp8;
  logic [127:0]      g8;

  pp_generator               dut4 (.x(x4), .y(y4), .pp(pp4), .garbage(g4));
  pp_generator #(.N(8))      dut8 (.x(x8), .y(y8), .pp(pp8), .garbage(g8));

  initial begin : watchdog
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int v = 0; v < 256; v++) begin
      {x4, y4} = 8'(v);
      #1;
      for (int j = 0; j < 4; j++) begin
        checks++;
        if (pp4[j] !== (y4[j] ? x4 : 4'd0)) begin
          failures++;
          $display("FAIL N=4 x=%h y=%h row %0d = %b", x4, y4, j, pp4[j]);
        end
        for (int i = 0; i < 4; i++) begin
          checks++;
          if (g4[2*(j*4+i) +: 2] !== {x4[i], !x4[i] && y4[j]}) begin
            failures++;
            $display("FAIL N=4 garbage gate (%0d,%0d)", i, j);
          end
        end
      end
    end
    for (int t = 0; t < 2000; t++) begin
      x8 = 8'($urandom);
      y8 = 8'($urandom);
      #1;
      for (int j = 0; j < 8; j++) begin
        checks++;
        if (pp8[j] !== (y8[j] ? x8 : 8'd0)) begin
          failures++;
          $display("FAIL N=8 x=%h y=%h row %0d = %b", x8, y8, j, pp8[j]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
