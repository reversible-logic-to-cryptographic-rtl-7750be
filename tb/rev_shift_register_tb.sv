// rev_shift_register_tb: test of the shift register at its default 4 stages.
// Compares q and so, after every falling clock edge, with a reference
// register that either shifts right with si entering at the top (load = 0)
// or takes pin (load = 1).
module rev_shift_register_tb;
  logic       cp = 1'b1, si = 1'b0, load = 1'b1, so;
  logic [3:0] pin = '0, q, ref_q;
  int unsigned checks = 0, failures = 0;

  rev_shift_register dut (.*);

  always #10 cp = ~cp;

  initial begin : watchdog
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    @(negedge cp);
    #1 ref_q = q;
    for (int t = 0; t < 400; t++) begin
      #2;
      si   = 1'($urandom());
      load = ($urandom_range(0, 3) == 0);
      pin  = 4'($urandom());
      @(negedge cp);
      ref_q = load ? pin : {si, ref_q[3:1]};
      #1;
      checks++;
      if (q != ref_q || so != ref_q[0]) begin
        failures++;
        $display("FAIL t=%0d load=%b si=%b q=%b exp=%b", t, load, si, q, ref_q);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
