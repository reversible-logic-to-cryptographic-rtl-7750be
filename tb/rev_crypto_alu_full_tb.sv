// rev_crypto_alu_full_tb: the crypto-ALU at its default size (N = 1024,
// the RSA operand width), taken through one of each operation.
//
// Adds two, four and five random 1024-bit operands and runs one full
// 1024-bit Montgomery multiplication with a random odd 1024-bit modulus,
// checking every result against the simulator's wide arithmetic and the
// multiplication's latency of N+2 cycles. A second multiplication uses
// operands m-1, m-1 to drive the largest intermediate values.
module rev_crypto_alu_full_tb;
  import rev_pkg::*;
  localparam int unsigned N = 1024;   // the ALU's default width

  logic         cp = 1'b0, rst_n = 1'b0, start = 1'b0, cin = 1'b0;
  alu_op_t      op = OP_ADD;
  logic [N-1:0] a, b, c, d, e, m;
  logic [N+2:0] result;
  logic         busy, done;
  int unsigned  checks = 0, failures = 0;

  rev_crypto_alu dut (.*);

  always #5 cp = ~cp;

  initial begin : watchdog
    repeat (3 * (N + 20)) @(posedge cp);
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
      $display("FAIL %s", what);
    end
  endtask

  task automatic montmul(input logic [N-1:0] x, input logic [N-1:0] y);
    int unsigned  cycles = 0;
    logic [2*N:0] l, r;
    @(negedge cp);
    op = OP_MONTMUL; a = x; b = y; start = 1'b1;
    @(posedge cp);
    @(negedge cp) start = 1'b0;
    while (!done) begin
      @(posedge cp);
      cycles++;
    end
    #1;
    l = ({{(N+1){1'b0}}, result[N-1:0]} << N) % {{(N+1){1'b0}}, m};
    r = ({{(N+1){1'b0}}, x} * {{(N+1){1'b0}}, y}) % {{(N+1){1'b0}}, m};
    check(cycles == N + 2, $sformatf("montmul latency %0d", cycles));
    check(result[N-1:0] < m && result[N+2:N] == 3'b000, "montmul range");
    check(l == r, "montmul value");
  endtask

  initial begin : stimulus
    a = rand_n(); b = rand_n(); c = rand_n(); d = rand_n(); e = rand_n();
    m = rand_n() | 1 | (N'(1) << (N - 1));
    cin = 1'b1;
    repeat (3) @(posedge cp);
    rst_n = 1'b1;
    op = OP_ADD;  #1;
    check(result == (N+3)'(a) + (N+3)'(b) + (N+3)'(cin), "add");
    op = OP_ADD4; #1;
    check(result == (N+3)'(a) + (N+3)'(b) + (N+3)'(c) + (N+3)'(d) + (N+3)'(cin), "add4");
    op = OP_ADD5; #1;
    check(result == (N+3)'(a) + (N+3)'(b) + (N+3)'(c) + (N+3)'(d) + (N+3)'(e)
                    + (N+3)'(cin), "add5");
    montmul(rand_n() % m, rand_n() % m);
    montmul(m - 1, m - 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
