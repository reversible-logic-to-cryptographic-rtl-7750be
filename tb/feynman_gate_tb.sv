// feynman_gate_tb: exhaustive test of the Feynman gate (copy with b = 0,
// complement with b = 1).
module feynman_gate_tb;
  logic a, b, p, q;
  int unsigned checks = 0, failures = 0;

  feynman_gate dut (.*);

  initial begin : watchdog
    #10000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int v = 0; v < 4; v++) begin
      {a, b} = 2'(v);
      #1;
      checks++;
      if (p != a || q != (b ? !a : a)) begin
        failures++;
        $display("FAIL %b -> %b", {a, b}, {p, q});
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
