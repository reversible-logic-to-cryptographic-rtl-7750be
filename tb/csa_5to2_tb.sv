// csa_5to2_tb: exhaustive test of the five-to-two compressor slice.
// For all 128 input patterns checks
// i1+..+i5+cin1+cin2 = sum + 2*(carry + cout1 + cout2), and that cout1 does
// not depend on cin1/cin2 and cout2 not on cin2.
module csa_5to2_tb;
  logic i1, i2, i3, i4, i5, cin1, cin2, sum, carry, cout1, cout2;
  logic [5:0] g;
  int unsigned checks = 0, failures = 0;

  csa_5to2 dut (.*);

  initial begin : watchdog
    #10000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic ref1, ref2;
    for (int v = 0; v < 128; v++) begin
      {i1, i2, i3, i4, i5, cin1, cin2} = 7'(v);
      #1;
      checks++;
      if (int'(sum) + 2 * (int'(carry) + int'(cout1) + int'(cout2)) != $countones(7'(v))) begin
        failures++;
        $display("FAIL %b -> sum=%b carry=%b cout1=%b cout2=%b", 7'(v), sum, carry, cout1, cout2);
      end
      if (v[1:0] == 2'b00) ref1 = cout1;
      if (v[0] == 1'b0) ref2 = cout2;
      checks++;
      if (cout1 != ref1 || cout2 != ref2) begin
        failures++;
        $display("FAIL carry-out depends on carry-in at %b", 7'(v));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
