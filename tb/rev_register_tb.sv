// rev_register_tb: test of the latch register at its default 4 bits.
// While cp is 1 q must follow i; while cp is 0 q must keep the value i had
// when cp fell, whatever i does.
module rev_register_tb;
  logic       cp;
  logic [3:0] i, q, held;
  int unsigned checks = 0, failures = 0;

  rev_register dut (.*);

  initial begin : watchdog
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 200; t++) begin
      cp = 1'b1;
      i = 4'($urandom());
      #1;
      checks++;
      if (q != i) begin failures++; $display("FAIL transparent i=%h q=%h", i, q); end
      held = i;
      cp = 1'b0;
      #1;
      for (int k = 0; k < 3; k++) begin
        i = 4'($urandom());
        #1;
        checks++;
        if (q != held) begin failures++; $display("FAIL hold exp=%h q=%h", held, q); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
