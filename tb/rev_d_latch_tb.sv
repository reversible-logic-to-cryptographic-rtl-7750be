// rev_d_latch_tb: test of the reversible D latch.
// Drives random (e, d) sequences and compares q with a reference that
// follows d while e is 1 and keeps the last value while e is 0; also checks
// the Feynman copy and the passed-on enable.
module rev_d_latch_tb;
  logic e, d, q, q_copy, e_out, garbage;
  logic ref_q;
  int unsigned checks = 0, failures = 0;

  rev_d_latch dut (.*);

  initial begin : watchdog
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    e = 1'b1; d = 1'b0; #1; ref_q = 1'b0;
    for (int t = 0; t < 400; t++) begin
      e = 1'($urandom());
      d = 1'($urandom());
      #1;
      if (e) ref_q = d;
      checks++;
      if (q != ref_q || q_copy != ref_q || e_out != e) begin
        failures++;
        $display("FAIL t=%0d e=%b d=%b q=%b copy=%b exp=%b", t, e, d, q, q_copy, ref_q);
      end
      // while closed, toggling d must not disturb q
      if (!e) begin
        d = ~d;
        #1;
        checks++;
        if (q != ref_q) begin
          failures++;
          $display("FAIL closed latch followed d at t=%0d", t);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
