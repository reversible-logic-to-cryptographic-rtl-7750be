// feynman_gate: the 2x2 reversible Feynman (controlled-NOT) gate.
//
//   p = a
//   q = a xor b
// With b tied to 0 the gate copies a onto two wires (the reversible way to
// fan a signal out); with b tied to 1 it gives a and its complement.
// The equations are the gate's standard definition.
//
// Interface: a, b in; p, q out. Combinational.
module feynman_gate (
  input  logic a,
  input  logic b,
  output logic p,
  output logic q
);
  always_comb begin
    p = a;
    q = a ^ b;
  end
endmodule
