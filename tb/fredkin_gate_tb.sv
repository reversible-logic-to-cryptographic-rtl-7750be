// fredkin_gate_tb: exhaustive test of the Fredkin gate.
// Checks the controlled swap (x1 = 0: y2 = x2, y3 = x3; x1 = 1: swapped)
// and that the number of ones is the same at input and output.
module fredkin_gate_tb;
  logic x1, x2, x3, y1, y2, y3;
  int unsigned checks = 0, failures = 0;

  fredkin_gate dut (.*);

  initial begin : watchdog
    #10000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int v = 0; v < 8; v++) begin
      {x1, x2, x3} = 3'(v);
      #1;
      checks++;
      if ({y1, y2, y3} != (x1 ? {x1, x3, x2} : {x1, x2, x3})) begin
        failures++;
        $display("FAIL %b -> %b", {x1, x2, x3}, {y1, y2, y3});
      end
      checks++;
      if ($countones({y1, y2, y3}) != $countones({x1, x2, x3})) begin
        failures++;
        $display("FAIL not conservative %b -> %b", {x1, x2, x3}, {y1, y2, y3});
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
