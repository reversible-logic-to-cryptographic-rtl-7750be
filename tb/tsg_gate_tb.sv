// tsg_gate_tb: exhaustive test of the TSG gate.
// Compares all 16 input patterns with the gate's truth table, written here
// in sum-of-products form, and checks that the 16 output patterns are all
// different (the gate is reversible).
module tsg_gate_tb;
  logic a, b, c, d, p, q, r, s;
  int unsigned checks = 0, failures = 0;
  bit seen [16];

  tsg_gate dut (.*);

  initial begin : watchdog
    #10000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic eq, er, es;
    for (int k = 0; k < 16; k++) seen[k] = 1'b0;
    for (int v = 0; v < 16; v++) begin
      {a, b, c, d} = 4'(v);
      #1;
      // Q = A'C' xor B' = (A or C) xor B
      eq = ((a | c) != b);
      er = eq != d;
      es = (eq & d) != ((a & b) != c);
      checks++;
      if ({p, q, r, s} != {a, eq, er, es}) begin
        failures++;
        $display("FAIL in=%b out=%b exp=%b", {a, b, c, d}, {p, q, r, s}, {a, eq, er, es});
      end
      checks++;
      if (seen[{p, q, r, s}]) begin
        failures++;
        $display("FAIL output %b repeated", {p, q, r, s});
      end
      seen[{p, q, r, s}] = 1'b1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
