// rev_crypto_alu_tb: end-to-end test of the crypto-ALU.
//
// Issues a random mix of the four operations, switching the operation on
// every request, and checks each result against the simulator's own wide
// arithmetic: a+b+cin, a+b+c+d+cin, a+b+c+d+e+cin, and for the Montgomery
// product P < m and P*2^N = a*b (mod m), with done exactly N+2 cycles after
// start. It counts how often each mechanism occurred (every operation, an
// operation switch, a carry out of the two-operand adder, a five-operand sum
// that needs N+3 bits, a Montgomery result that needed the final
// subtraction, i.e. S+C >= m) and counts a failure for any that never did.
// N is a parameter of this testbench; the full-size run uses the default.
module rev_crypto_alu_tb
  import rev_pkg::*;
#(
  parameter int unsigned N    = 32,
  parameter int unsigned NOPS = 80
);
  logic         cp = 1'b0, rst_n = 1'b0, start = 1'b0, cin = 1'b0;
  alu_op_t      op = OP_ADD;
  logic [N-1:0] a, b, c, d, e, m;
  logic [N+2:0] result;
  logic         busy, done;
  int unsigned  checks = 0, failures = 0;
  int unsigned  n_op [4];
  int unsigned  n_switch = 0, n_cout = 0, n_wide5 = 0, n_sub = 0;

  rev_crypto_alu #(.N(N)) dut (.*);

  always #5 cp = ~cp;

  initial begin : watchdog
    repeat (NOPS * (N + 12) + 200) @(posedge cp);
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
      $display("FAIL %s: op=%s a=%h b=%h result=%h", what, op.name(), a, b, result);
    end
  endtask

  // Montgomery product seen from outside: true if p*2^N = a*b (mod m)
  function automatic bit mont_ok(input logic [N-1:0] p, input logic [N-1:0] x,
                                 input logic [N-1:0] y, input logic [N-1:0] mod);
    logic [2*N:0] l, r;
    l = ({{(N+1){1'b0}}, p} << N) % {{(N+1){1'b0}}, mod};
    r = ({{(N+1){1'b0}}, x} * {{(N+1){1'b0}}, y}) % {{(N+1){1'b0}}, mod};
    return (l == r) && (p < mod);
  endfunction

  // Would the final P >= M correction be taken? Recomputes S + C with a
  // plain bit-serial Montgomery loop (no carry save form).
  function automatic bit needs_sub(input logic [N-1:0] x, input logic [N-1:0] y,
                                   input logic [N-1:0] mod);
    logic [N+1:0] t = '0;
    for (int i = 0; i < N; i++) begin
      if (x[i]) t = t + {2'b00, y};
      if (t[0]) t = t + {2'b00, mod};
      t = t >> 1;
    end
    return t >= {2'b00, mod};
  endfunction

  initial begin : stimulus
    alu_op_t      prev = OP_ADD;
    logic [N+2:0] expect_v;
    int unsigned  cycles;
    a = '0; b = '0; c = '0; d = '0; e = '0; m = 1;
    for (int k = 0; k < 4; k++) n_op[k] = 0;
    repeat (3) @(posedge cp);
    rst_n = 1'b1;
    for (int t = 0; t < NOPS; t++) begin
      @(negedge cp);
      op  = alu_op_t'(t < 4 ? t : $urandom_range(0, 3));
      a = rand_n(); b = rand_n(); c = rand_n(); d = rand_n(); e = rand_n();
      cin = 1'($urandom());
      if (t == 2) begin a = '1; b = '1; c = '1; d = '1; e = '1; cin = 1'b1; end
      if (t > 0 && op != prev) n_switch++;
      prev = op;
      if (op == OP_MONTMUL) begin
        m = rand_n() | 1 | (N'(1) << (N - 1));
        if (t % 3 == 0) m = rand_n() | 1;
        a = a % m;
        b = b % m;
        if (needs_sub(a, b, m)) n_sub++;
        start = 1'b1;
        @(posedge cp);
        cycles = 0;
        @(negedge cp) start = 1'b0;
        check(busy, "busy after start");
        while (!done) begin
          @(posedge cp);
          cycles++;
        end
        #1;
        check(cycles == N + 2, $sformatf("latency %0d", cycles));
        check(mont_ok(result[N-1:0], a, b, m) && result[N+2:N] == 3'b000, "montmul");
      end else begin
        #1;
        unique case (op)
          OP_ADD:  expect_v = (N+3)'(a) + (N+3)'(b) + (N+3)'(cin);
          OP_ADD4: expect_v = (N+3)'(a) + (N+3)'(b) + (N+3)'(c) + (N+3)'(d) + (N+3)'(cin);
          default: expect_v = (N+3)'(a) + (N+3)'(b) + (N+3)'(c) + (N+3)'(d) + (N+3)'(e)
                              + (N+3)'(cin);
        endcase
        if (op == OP_ADD && expect_v[N]) n_cout++;
        if (op == OP_ADD5 && expect_v[N+2]) n_wide5++;
        check(done, "done for an addition");
        check(result == expect_v, $sformatf("sum, expected %h", expect_v));
      end
      n_op[op]++;
    end
    for (int k = 0; k < 4; k++) begin
      $display("operation %s: %0d", alu_op_t'(k), n_op[k]);
      check(n_op[k] > 0, "operation never issued");
    end
    $display("switches %0d, adder carry-outs %0d, wide 5-operand sums %0d, final subtractions %0d",
             n_switch, n_cout, n_wide5, n_sub);
    check(n_switch > 0, "no operation switch");
    check(n_cout > 0, "no adder carry-out");
    check(n_wide5 > 0, "no N+3-bit five-operand sum");
    check(n_sub > 0, "final subtraction never taken");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
