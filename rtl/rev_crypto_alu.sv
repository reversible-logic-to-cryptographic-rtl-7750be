// rev_crypto_alu: prototype arithmetic unit of a crypto-processor built from
// reversible gates.
//
// The unit gathers the reversible arithmetic parts into one block, the way
// a public-key crypto-processor's ALU uses them: the TSG carry propagate
// adder, multi-operand addition through the four-to-two and five-to-two
// carry save compressors, and the Montgomery modular multiplier built from
// carry save adders, latch registers and shift registers. Operand width N
// defaults to 1024 bits, the RSA operand size.
//
//   OP_ADD     result = a + b + cin                   (rev_cpa, N bits)
//   OP_ADD4    result = a + b + c + d + cin           (csa_4to2 row + rev_cpa)
//   OP_ADD5    result = a + b + c + d + e + cin       (csa_5to2 row + rev_cpa)
//   OP_MONTMUL result = a * b * 2^-N mod m            (rev_mont_mult)
//
// For the multi-operand sums the operands are zero-extended to N+3 bits, so
// the compressor rows never carry out, and the sum and (doubled) carry
// vectors are added by an (N+3)-bit rev_cpa. The set of operations, the
// operand ports and the result multiplexer are this design's choices;
// the paper lists the parts, not how an ALU combines them. The result
// multiplexer and the sequencer are plain logic, which the paper permits
// for control.
//
// Interface: op selects the operation. The three additions are
// combinational: result is valid once the inputs settle and done is 1.
// OP_MONTMUL starts on a start pulse (sampled on the rising edge of cp);
// busy is then high, and done rises N+2 cycles later with result = P held
// until the next start. a is captured at start; b, m and op must be held
// while busy. rst_n: asynchronous active-low reset of the sequencer.
module rev_crypto_alu
  import rev_pkg::*;
#(
  parameter int unsigned N = 1024
) (
  input  logic         cp,
  input  logic         rst_n,
  input  alu_op_t      op,
  input  logic         start,
  input  logic [N-1:0] a,
  input  logic [N-1:0] b,
  input  logic [N-1:0] c,
  input  logic [N-1:0] d,
  input  logic [N-1:0] e,
  input  logic [N-1:0] m,
  input  logic         cin,
  output logic [N+2:0] result,
  output logic         busy,
  output logic         done
);
  localparam int unsigned WE = N + 3;

  // ---------------- two-operand addition ----------------
  logic [N-1:0] add_s, add_g1, add_g0;
  logic         add_cout;
  rev_cpa #(.W(N)) u_cpa (.x(a), .y(b), .cin(cin),
                          .s(add_s), .cout(add_cout), .g1(add_g1), .g0(add_g0));

  // ---------------- four-operand addition ----------------
  logic [WE-1:0] a_x, b_x, c_x, d_x, e_x;
  assign a_x = WE'(a);
  assign b_x = WE'(b);
  assign c_x = WE'(c);
  assign d_x = WE'(d);
  assign e_x = WE'(e);

  logic [WE-1:0] s4, cv4, sum4, g4a, g4b;
  logic          cout4, cpa4_cout;
  csa_4to2_row #(.W(WE)) u_row4 (.a(a_x), .b(b_x), .c(c_x), .d(d_x), .cin(cin),
                                 .s(s4), .cv(cv4), .cout(cout4));
  rev_cpa #(.W(WE)) u_cpa4 (.x(s4), .y({cv4[WE-2:0], 1'b0}), .cin(1'b0),
                            .s(sum4), .cout(cpa4_cout), .g1(g4a), .g0(g4b));

  // ---------------- five-operand addition ----------------
  logic [WE-1:0] s5, cv5, sum5, g5a, g5b;
  logic          cout5a, cout5b, cpa5_cout;
  csa_5to2_row #(.W(WE)) u_row5 (.a(a_x), .b(b_x), .c(c_x), .d(d_x), .e(e_x), .cin(cin),
                                 .s(s5), .cv(cv5), .cout1(cout5a), .cout2(cout5b));
  rev_cpa #(.W(WE)) u_cpa5 (.x(s5), .y({cv5[WE-2:0], 1'b0}), .cin(1'b0),
                            .s(sum5), .cout(cpa5_cout), .g1(g5a), .g0(g5b));

  // ---------------- Montgomery multiplication ----------------
  logic [N-1:0] mm_p;
  logic         mm_busy, mm_done;
  rev_mont_mult #(.N(N)) u_mont (
    .cp(cp), .rst_n(rst_n), .start(start && op == OP_MONTMUL),
    .x(a), .y(b), .m(m), .p(mm_p), .busy(mm_busy), .done(mm_done)
  );

  // ---------------- result selection ----------------
  always_comb begin
    unique case (op)
      OP_ADD:     begin result = {2'b00, add_cout, add_s}; done = 1'b1; end
      OP_ADD4:    begin result = sum4;                     done = 1'b1; end
      OP_ADD5:    begin result = sum5;                     done = 1'b1; end
      OP_MONTMUL: begin result = {3'b000, mm_p};           done = mm_done; end
    endcase
  end
  assign busy = mm_busy;
endmodule
