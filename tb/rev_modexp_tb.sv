// rev_modexp_tb: modular exponentiation a^b mod n on the crypto-ALU.
//
// The testbench plays the part of the processor's control: it runs the
// square-and-multiply loop, issuing one OP_MONTMUL per square and one per
// set exponent bit. Operands are first taken into the Montgomery domain
// (multiplying by R^2 mod n, with R = 2^N; the testbench precomputes R^2 mod
// n as software would) and the result is taken out again by multiplying
// by 1. Each exponentiation is compared with a plain square-and-multiply in
// the simulator's wide arithmetic. N = 128 with 32-bit exponents keeps the
// run short; the loop is the same at RSA size.
module rev_modexp_tb;
  import rev_pkg::*;
  localparam int unsigned N    = 128;
  localparam int unsigned EB   = 32;   // exponent bits
  localparam int unsigned NEXP = 4;

  logic         cp = 1'b0, rst_n = 1'b0, start = 1'b0, cin = 1'b0;
  alu_op_t      op = OP_MONTMUL;
  logic [N-1:0] a, b, c = '0, d = '0, e = '0, m;
  logic [N+2:0] result;
  logic         busy, done;
  int unsigned  checks = 0, failures = 0, n_mult = 0;

  rev_crypto_alu #(.N(N)) dut (.*);

  always #5 cp = ~cp;

  initial begin : watchdog
    repeat (NEXP * (2 * EB + 4) * (N + 6) + 100) @(posedge cp);
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

  task automatic montmul(input logic [N-1:0] x, input logic [N-1:0] y,
                         output logic [N-1:0] p);
    @(negedge cp);
    a = x; b = y; start = 1'b1;
    @(posedge cp);
    @(negedge cp) start = 1'b0;
    while (!done) @(posedge cp);
    #1 p = result[N-1:0];
    n_mult++;
  endtask

  function automatic logic [N-1:0] mulmod(input logic [N-1:0] x, input logic [N-1:0] y,
                                          input logic [N-1:0] mod);
    logic [2*N-1:0] t;
    t = ({{N{1'b0}}, x} * {{N{1'b0}}, y}) % {{N{1'b0}}, mod};
    return t[N-1:0];
  endfunction

  initial begin : stimulus
    logic [N-1:0]  base, r2, am, acc, got, want;
    logic [2*N:0]  rr;
    logic [EB-1:0] ex;
    repeat (3) @(posedge cp);
    rst_n = 1'b1;
    for (int t = 0; t < NEXP; t++) begin
      m    = rand_n() | 1 | (N'(1) << (N - 1));
      base = rand_n() % m;
      ex   = EB'($urandom());
      if (t == 0) ex = '1;
      rr   = ((2*N+1)'(1) << (2 * N)) % (2*N+1)'(m);
      r2   = rr[N-1:0];
      // into the Montgomery domain
      montmul(base, r2, am);
      montmul(N'(1), r2, acc);
      // left-to-right square and multiply
      for (int i = EB - 1; i >= 0; i--) begin
        montmul(acc, acc, acc);
        if (ex[i]) montmul(acc, am, acc);
      end
      // out of the Montgomery domain
      montmul(acc, N'(1), got);
      // reference
      want = N'(1);
      for (int i = EB - 1; i >= 0; i--) begin
        want = mulmod(want, want, m);
        if (ex[i]) want = mulmod(want, base, m);
      end
      checks++;
      if (got != want) begin
        failures++;
        $display("FAIL %h^%h mod %h: got %h expected %h", base, ex, m, got, want);
      end
    end
    $display("%0d Montgomery multiplications", n_mult);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
