// tsg_full_adder: a full adder made of a single TSG gate.
//
// With the gate's third input tied to 0, Q reduces to A xor B,
// R to A xor B xor Cin (the sum) and S to (A xor B).Cin xor A.B (the
// carry). P = A and Q = A xor B are garbage outputs: they are brought out
// so that the gate stays reversible, but nothing downstream needs them.
// The input assignment (A, B, 0, Cin) follows the published full-adder
// configuration of the gate.
//
// Interface: a, b, cin in; sum, cout, and the two garbage bits g_p, g_q out.
// Timing: combinational, one gate delay.
module tsg_full_adder (
  input  logic a,
  input  logic b,
  input  logic cin,
  output logic sum,
  output logic cout,
  output logic g_p,
  output logic g_q
);
  tsg_gate u_tsg (
    .a(a), .b(b), .c(1'b0), .d(cin),
    .p(g_p), .q(g_q), .r(sum), .s(cout)
  );
endmodule
