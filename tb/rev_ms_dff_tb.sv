// rev_ms_dff_tb: test of the master-slave flip-flop.
// Changes d at random points of a free-running clock (in both clock
// phases) and checks that q changes only at falling edges of cp, taking the
// d present just before the edge, and that it never follows d in between.
module rev_ms_dff_tb;
  logic cp = 1'b1, d = 1'b0, q;
  logic ref_q;
  int unsigned checks = 0, failures = 0;

  rev_ms_dff dut (.*);

  always #10 cp = ~cp;

  initial begin : watchdog
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // reference: value of d just before each falling edge
  always @(negedge cp) ref_q <= d;

  initial begin
    @(negedge cp);
    for (int t = 0; t < 300; t++) begin
      // d changes twice per period, at random instants away from the edges
      #($urandom_range(1, 7)) d = 1'($urandom());
      #($urandom_range(1, 7)) d = 1'($urandom());
      #1;
      // q still shows the value taken at the previous falling edge
      checks++;
      if (q != ref_q) begin failures++; $display("FAIL q followed d before the edge at t=%0d", t); end
      @(negedge cp);
      #1;
      checks++;
      if (q != ref_q) begin failures++; $display("FAIL t=%0d q=%b exp=%b", t, q, ref_q); end
      // between edges q must not move
      d = ~d;
      #1;
      checks++;
      if (q != ref_q) begin failures++; $display("FAIL q moved off the edge at t=%0d", t); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
