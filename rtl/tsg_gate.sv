// tsg_gate: the 4x4 reversible "TSG" gate.
//
// A one-through reversible gate: input A is passed straight to output P,
// the other three outputs are
//   Q = A'C' xor B'
//   R = Q xor D
//   S = Q.D xor (A.B xor C)
// Every output pattern comes from exactly one input pattern, so the gate
// loses no information. The equations are exactly those of the gate's
// published definition; nothing here is a design choice.
//
// Interface: four single-bit inputs a..d, four single-bit outputs p..s.
// Timing: purely combinational, one gate delay.
module tsg_gate (
  input  logic a,
  input  logic b,
  input  logic c,
  input  logic d,
  output logic p,
  output logic q,
  output logic r,
  output logic s
);
  always_comb begin
    p = a;
    q = (~a & ~c) ^ ~b;
    r = q ^ d;
    s = (q & d) ^ ((a & b) ^ c);
  end
endmodule
