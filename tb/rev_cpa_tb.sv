// rev_cpa_tb: test of the TSG ripple carry adder at its default 4-bit width
// (all 512 input combinations) and at 64 bits (random operands plus the
// longest carry ripple).
module rev_cpa_tb;
  localparam int unsigned WB = 64;
  logic [3:0]    x4, y4, s4, g14, g04;
  logic          cin4, cout4;
  logic [WB-1:0] x, y, s, g1, g0;
  logic          cin, cout;
  int unsigned   checks = 0, failures = 0;

  rev_cpa dut4 (.x(x4), .y(y4), .cin(cin4), .s(s4), .cout(cout4), .g1(g14), .g0(g04));
  rev_cpa #(.W(WB)) dut64 (.*);

  initial begin : watchdog
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int v = 0; v < 512; v++) begin
      {x4, y4, cin4} = 9'(v);
      #1;
      checks++;
      if ({cout4, s4} != 5'(int'(x4) + int'(y4) + int'(cin4))) begin
        failures++;
        $display("FAIL %0d+%0d+%0d -> %b%b", x4, y4, cin4, cout4, s4);
      end
      checks++;
      if (g14 != x4 || g04 != (x4 ^ y4)) begin
        failures++;
        $display("FAIL garbage");
      end
    end
    for (int t = 0; t < 200; t++) begin
      x = {$urandom(), $urandom()};
      y = {$urandom(), $urandom()};
      cin = 1'($urandom());
      if (t == 0) begin x = '1; y = '0; cin = 1'b1; end
      if (t == 1) begin x = '1; y = '1; cin = 1'b1; end
      #1;
      checks++;
      if ({cout, s} != ({1'b0, x} + {1'b0, y} + (WB+1)'(cin))) begin
        failures++;
        $display("FAIL %h+%h+%b -> %b %h", x, y, cin, cout, s);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
