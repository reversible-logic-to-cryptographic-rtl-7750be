// csa_5to2: reversible five-to-two carry save compressor (one bit slice).
//
// Three TSG full adders in a chain. The first adds i1, i2, i3 (its carry is
// cout1); the second adds the first sum to i4 and cin1 (its carry is cout2);
// the third adds the second sum to i5 and cin2 and gives the slice's sum and
// carry. cin1/cin2 come from cout1/cout2 of the less significant slice:
//   i1 + ... + i5 + cin1 + cin2 = sum + 2*(carry + cout1 + cout2).
// The gate-level wiring follows the published five-to-two compressor.
//
// Interface: i1..i5, cin1, cin2 in; sum, carry, cout1, cout2 and garbage
// g[5:0] out. Timing: combinational, three gate delays.
module csa_5to2 (
  input  logic       i1,
  input  logic       i2,
  input  logic       i3,
  input  logic       i4,
  input  logic       i5,
  input  logic       cin1,
  input  logic       cin2,
  output logic       sum,
  output logic       carry,
  output logic       cout1,
  output logic       cout2,
  output logic [5:0] g
);
  logic s1, s2;
  tsg_gate u_tsg1 (.a(i3), .b(i2), .c(1'b0), .d(i1),
                   .p(g[0]), .q(g[1]), .r(s1), .s(cout1));
  tsg_gate u_tsg2 (.a(i4), .b(cin1), .c(1'b0), .d(s1),
                   .p(g[2]), .q(g[3]), .r(s2), .s(cout2));
  tsg_gate u_tsg3 (.a(i5), .b(cin2), .c(1'b0), .d(s2),
                   .p(g[4]), .q(g[5]), .r(sum), .s(carry));
endmodule
