// csa_4to2_tb: exhaustive test of the four-to-two compressor slice.
// For all 32 input patterns checks i1+i2+i3+i4+cin = sum + 2*(carry + cout)
// and that cout does not depend on cin (no ripple along a row).
module csa_4to2_tb;
  logic i1, i2, i3, i4, cin, sum, carry, cout;
  logic [3:0] g;
  logic cout_cin0;
  int unsigned checks = 0, failures = 0;

  csa_4to2 dut (.*);

  initial begin : watchdog
    #10000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int v = 0; v < 32; v++) begin
      {i1, i2, i3, i4, cin} = 5'(v);
      #1;
      checks++;
      if (int'(sum) + 2 * (int'(carry) + int'(cout)) != $countones(5'(v))) begin
        failures++;
        $display("FAIL %b -> sum=%b carry=%b cout=%b", 5'(v), sum, carry, cout);
      end
      if (!cin) cout_cin0 = cout;
      else begin
        checks++;
        if (cout != cout_cin0) begin
          failures++;
          $display("FAIL cout depends on cin at %b", 5'(v));
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
