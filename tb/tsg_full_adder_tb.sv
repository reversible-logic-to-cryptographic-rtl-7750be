// tsg_full_adder_tb: exhaustive test of the TSG full adder.
// For all 8 input patterns checks 2*cout + sum = a + b + cin and the two
// garbage outputs (a, a xor b).
module tsg_full_adder_tb;
  logic a, b, cin, sum, cout, g_p, g_q;
  int unsigned checks = 0, failures = 0;

  tsg_full_adder dut (.*);

  initial begin : watchdog
    #10000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int v = 0; v < 8; v++) begin
      {a, b, cin} = 3'(v);
      #1;
      checks++;
      if ({cout, sum} != 2'(int'(a) + int'(b) + int'(cin))) begin
        failures++;
        $display("FAIL %b -> cout=%b sum=%b", {a, b, cin}, cout, sum);
      end
      checks++;
      if (g_p != a || g_q != (a != b)) begin
        failures++;
        $display("FAIL garbage %b -> %b %b", {a, b, cin}, g_p, g_q);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
