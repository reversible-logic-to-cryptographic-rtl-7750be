// rev_mont_mult_tb: self-checking test of the Montgomery multiplier.
//
// Runs random multiplications with a random odd modulus M of N bits and
// 0 <= X, Y < M, and checks for each that P < M and P * 2^N = X * Y (mod M),
// computed with the simulator's wide arithmetic, and that done rises
// exactly N+2 clock cycles after the edge that takes start. Also checks
// that P stays held after done. N is reduced to keep the run short.
module rev_mont_mult_tb;
  localparam int unsigned N    = 24;
  localparam int unsigned NOPS = 40;

  logic         cp = 1'b0;
  logic         rst_n = 1'b0;
  logic         start = 1'b0;
  logic [N-1:0] x, y, m, p;
  logic         busy, done;
  int unsigned  checks = 0, failures = 0;

  rev_mont_mult #(.N(N)) dut (.*);

  always #5 cp = ~cp;

  initial begin : watchdog
    repeat (NOPS * (N + 10) + 100) @(posedge cp);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [N-1:0] rand_n();
    logic [N+31:0] r = '0;
    for (int k = 0; k < N; k += 32) r = (r << 32) | (N+32)'($urandom());
    return r[N-1:0];
  endfunction

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s: x=%h y=%h m=%h p=%h", what, x, y, m, p);
    end
  endtask

  initial begin : stimulus
    logic [2*N:0] lhs, rhs;
    int unsigned  cycles;
    x = '0; y = '0; m = 1;
    repeat (3) @(posedge cp);
    rst_n = 1'b1;
    for (int t = 0; t < NOPS; t++) begin
      @(negedge cp);
      m = rand_n() | 1 | (1 << (N - 1));
      if (t % 4 == 1) m = rand_n() | 1;            // smaller moduli too
      if (t == 0) m = {N{1'b1}};                   // largest modulus
      x = rand_n() % m;
      y = rand_n() % m;
      if (t == 2) begin x = m - 1; y = m - 1; end  // largest operands
      if (t == 3) x = '0;
      start = 1'b1;
      @(posedge cp);
      cycles = 0;
      @(negedge cp) start = 1'b0;
      x = ~x;                                      // x is captured at start
      while (!done) begin
        @(posedge cp);
        cycles++;
      end
      x = ~x;
      check(cycles == N + 2, $sformatf("latency %0d", cycles));
      lhs = ({{(N+1){1'b0}}, p} << N) % {{(N+1){1'b0}}, m};
      rhs = ({{(N+1){1'b0}}, x} * {{(N+1){1'b0}}, y}) % {{(N+1){1'b0}}, m};
      check(p < m, "range");
      check(lhs == rhs, "value");
      repeat (3) @(posedge cp);
      check(done && lhs == ((({{(N+1){1'b0}}, p}) << N) % {{(N+1){1'b0}}, m}), "hold");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
